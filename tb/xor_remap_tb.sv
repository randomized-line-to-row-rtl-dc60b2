// xor_remap_tb: checks the Rubix-D translation rule.
// A 3-bit memory (8 locations, currKey 010, nextKey 110, the worked example
// of the xor remapping) is remapped episode by episode: at each Ptr the
// swap of location Ptr with Ptr^nextKey is done on a model memory, and for
// every Ptr every line must be found by the translation exactly where the
// model memory holds it. The same is then done for random keys on 6-bit
// addresses, and a 21-bit instance is checked against the formula.
module xor_remap_tb;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [2:0]  a3, c3, n3, p3, m3;
  logic [5:0]  a6, c6, n6, p6, m6;
  logic [20:0] a21, c21, n21, p21, m21;
  xor_remap #(.W(3))  u3  (.addr(a3),  .curr_key(c3),  .next_key(n3),  .ptr(p3),  .mapped(m3));
  xor_remap #(.W(6))  u6  (.addr(a6),  .curr_key(c6),  .next_key(n6),  .ptr(p6),  .mapped(m6));
  xor_remap           u21 (.addr(a21), .curr_key(c21), .next_key(n21), .ptr(p21), .mapped(m21));

  int mem [64];   // location -> line held there

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---- worked example: currKey 010, nextKey 110 -------------------------
    c3 = 3'b010; n3 = 3'b110;
    for (int l = 0; l < 8; l++) mem[l ^ 2] = l;
    for (int p = 0; p < 8; p++) begin
      p3 = 3'(p);
      for (int l = 0; l < 8; l++) begin
        a3 = 3'(l); #1;
        check(mem[m3] == l, $sformatf("3-bit ptr=%0d line=%0d at %0d", p, l, m3));
      end
      if ((p ^ 6) > p) begin automatic int t = mem[p]; mem[p] = mem[p ^ 6]; mem[p ^ 6] = t; end
      if (p == 0) check(mem[0] == 3'b100 && mem[6] == 3'b010, "after first swap: 000 holds 100, 110 holds 010");
      if (p == 1) check(mem[1] == 3'b101 && mem[7] == 3'b011, "after second swap: 001 holds 101, 111 holds 011");
    end
    // epoch end: every line sits at L ^ currKey ^ nextKey
    for (int l = 0; l < 8; l++) check(mem[l ^ 2 ^ 6] == l, "epoch end mapping");

    // ---- random keys, 6 bits, three epochs ---------------------------------
    c6 = 6'($urandom);
    for (int l = 0; l < 64; l++) mem[l ^ c6] = l;
    for (int e = 0; e < 3; e++) begin
      n6 = 6'($urandom);
      for (int p = 0; p < 64; p++) begin
        p6 = 6'(p);
        for (int l = 0; l < 64; l += 3) begin
          a6 = 6'(l); #1;
          check(mem[m6] == l, $sformatf("6-bit e=%0d ptr=%0d line=%0d", e, p, l));
        end
        if ((p ^ n6) > p) begin automatic int t = mem[p]; mem[p] = mem[p ^ n6]; mem[p ^ n6] = t; end
      end
      c6 = c6 ^ n6;
    end

    // ---- 21-bit against the formula -------------------------------------
    for (int n = 0; n < 500; n++) begin
      logic [20:0] l1, l2, e;
      a21 = 21'($urandom); c21 = 21'($urandom); n21 = 21'($urandom); p21 = 21'($urandom);
      #1;
      l1 = a21 ^ c21; l2 = l1 ^ n21;
      e = ((l1 < p21) || (l2 < p21)) ? l2 : l1;
      check(m21 == e, "21-bit formula");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
