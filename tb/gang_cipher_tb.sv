// gang_cipher_tb: checks the stand-in gang cipher.
//  - a small 8-bit instance is fed all 256 inputs: the outputs must be a
//    permutation (no two gang addresses collide in DRAM);
//  - the default 26-bit, 96-bit-key instance is compared with a model of
//    the Feistel network written here on 64-bit integers;
//  - the output appears exactly 3 cycles after the input, and the pipeline
//    holds while en is low;
//  - changing one key bit changes the mapping.
module gang_cipher_tb;
  logic clk = 0, rst_n = 0, en = 1;
  logic [95:0] key;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- model ---------------------------------------------------------------
  function automatic longint unsigned rotl_w(longint unsigned x, int s, int w);
    longint unsigned m = (64'd1 << w) - 1;
    s = s % w;
    if (s == 0) return x & m;
    return ((x << s) | (x >> (w - s))) & m;
  endfunction

  function automatic longint unsigned model(longint unsigned pt, logic [95:0] k, int w, int rounds);
    int rw = w / 2, lw = w - rw;
    longint unsigned l = pt >> rw, r = pt & ((64'd1 << rw) - 1), t, f, rk;
    logic [95:0] kr;
    for (int i = 0; i < rounds; i++) begin
      int s = (7 * i) % 96;
      kr = (s == 0) ? k : ((k << s) | (k >> (96 - s)));
      rk = (kr[63:0] & ((64'd1 << lw) - 1)) ^ longint'(i);
      t  = ((i % 2 == 0) ? l : r) ^ rk;
      f  = t ^ (rotl_w(t, 1, lw) & rotl_w(t, 8, lw)) ^ rotl_w(t, 2, lw);
      if (i % 2 == 0) r = r ^ (f & ((64'd1 << rw) - 1));
      else            l = l ^ (f & ((64'd1 << lw) - 1));
    end
    return (l << rw) | r;
  endfunction

  // ---- DUTs ----------------------------------------------------------------
  logic        s_iv, s_ov;  logic [7:0]  s_in, s_out;
  logic        b_iv, b_ov;  logic [25:0] b_in, b_out;

  gang_cipher #(.WIDTH(8)) u_small (.clk(clk), .rst_n(rst_n), .en(en), .key(key),
    .in_valid(s_iv), .in_data(s_in), .out_valid(s_ov), .out_data(s_out));
  gang_cipher u_big (.clk(clk), .rst_n(rst_n), .en(en), .key(key),
    .in_valid(b_iv), .in_data(b_in), .out_valid(b_ov), .out_data(b_out));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit seen [256];
  longint unsigned exp_q [$];
  int lat;

  initial begin
    key = {32'hDEAD_BEEF, 64'h0123_4567_89AB_CDEF};
    s_iv = 0; b_iv = 0; s_in = 0; b_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // permutation of the 8-bit space
    for (int v = 0; v < 256 + 2; v++) begin
      s_iv = (v < 256); s_in = 8'(v);
      @(posedge clk); #1;
      if (s_ov) begin
        check(!seen[s_out], $sformatf("8-bit collision at %0h", s_out));
        seen[s_out] = 1;
        check(64'(s_out) == model(64'(v - 2), key, 8, 12), $sformatf("8-bit model v=%0d", v - 2));
      end
      @(negedge clk);
    end
    s_iv = 0;
    // latency: one token, count cycles
    @(negedge clk);
    b_iv = 1; b_in = 26'h2AB_CDEF;
    @(negedge clk); b_iv = 0; lat = 1;
    while (!b_ov && lat < 10) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("latency %0d, expected 3", lat));
    check(64'(b_out) == model(64'h2AB_CDEF, key, 26, 12), "26-bit model single");
    // random 26-bit inputs streamed back to back
    for (int n = 0; n < 2000; n++) begin
      b_iv = 1; b_in = 26'($urandom);
      exp_q.push_back(model(64'(b_in), key, 26, 12));
      @(negedge clk);
      if (b_ov) check(64'(b_out) == exp_q.pop_front(), "26-bit stream vs model");
    end
    b_iv = 0;
    repeat (3) begin @(negedge clk); if (b_ov) check(64'(b_out) == exp_q.pop_front(), "26-bit tail"); end
    check(exp_q.size() == 0, "all 26-bit outputs seen");
    // stall: with en low the output stays put
    b_iv = 1; b_in = 26'h155_5555; @(negedge clk); b_iv = 0;
    @(negedge clk); en = 0;
    repeat (5) @(negedge clk);
    check(!b_ov, "no output while stalled after 2 cycles");
    en = 1; @(negedge clk);
    check(b_ov && 64'(b_out) == model(64'h155_5555, key, 26, 12), "output after stall");
    // key sensitivity
    begin
      int diff = 0;
      for (int v = 0; v < 64; v++)
        if (model(64'(v), key, 26, 12) != model(64'(v), key ^ 96'd1 << 77, 26, 12)) diff++;
      key = key ^ (96'd1 << 77);
      b_iv = 1; b_in = 26'd5; @(negedge clk); b_iv = 0; repeat (2) @(negedge clk);
      check(b_ov && 64'(b_out) == model(64'd5, key, 26, 12), "model after key change");
      check(diff > 48, "key bit changes the mapping");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
