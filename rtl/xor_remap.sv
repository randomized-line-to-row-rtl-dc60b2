// xor_remap: Rubix-D row-address translation for one v-group.
//
// A v-group's rows move from one xor key to the next, one location per
// remap episode. Locations below Ptr already use the new mapping. The
// translation has two steps:
//   (1) L' = L xor currKey
//   (2) if (L' < Ptr) or ((L' xor nextKey) < Ptr) then L' = L' xor nextKey
// The second test catches a row whose old location is still ahead of Ptr,
// but which was swapped out when Ptr passed its new location. This module
// follows that rule exactly. It is purely combinational (one cycle with the
// register in rubix_d).
//
// Interface: addr, curr_key, next_key, ptr and mapped are all W bits wide.
module xor_remap #(
  parameter int unsigned W = 21
) (
  input  logic [W-1:0] addr,
  input  logic [W-1:0] curr_key,
  input  logic [W-1:0] next_key,
  input  logic [W-1:0] ptr,
  output logic [W-1:0] mapped
);
  logic [W-1:0] l1, l2;

  always_comb begin
    l1 = addr ^ curr_key;
    l2 = l1 ^ next_key;
    mapped = ((l1 < ptr) || (l2 < ptr)) ? l2 : l1;
  end
endmodule
