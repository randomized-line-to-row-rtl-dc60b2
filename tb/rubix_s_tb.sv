// rubix_s_tb: checks the Rubix-S mapping.
//  - a 10-bit instance (4-line gangs, 8-bit cipher) maps all 1024 line
//    addresses: the result must be a permutation, keep the 2 line-in-gang
//    bits, and keep the 4 lines of a gang in one gang;
//  - the default 28-bit instance is compared with a model built from the
//    xorshift key draw and the Feistel network;
//  - key_ready rises 2 cycles after reset, latency is 3 cycles, a held
//    output stalls the pipeline without losing requests.
module rubix_s_tb;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  localparam logic [63:0] SEED = 64'hC0FF_EE00_1234_5678;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] xs(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13); y = y ^ (y >> 7); y = y ^ (y << 17);
    return y;
  endfunction
  function automatic longint unsigned rotl_w(longint unsigned x, int s, int w);
    longint unsigned m = (64'd1 << w) - 1;
    s = s % w;
    if (s == 0) return x & m;
    return ((x << s) | (x >> (w - s))) & m;
  endfunction
  function automatic longint unsigned cipher(longint unsigned pt, logic [95:0] k, int w);
    int rw = w / 2, lw = w - rw;
    longint unsigned l = pt >> rw, r = pt & ((64'd1 << rw) - 1), t, f, rk;
    logic [95:0] kr;
    for (int i = 0; i < 12; i++) begin
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

  // small instance
  logic s_kr, s_iv, s_ir, s_ov, s_or;
  logic [9:0] s_ia, s_oa;
  logic [9:0] s_it, s_ot;
  rubix_s #(.LINE_ADDR_W(10), .GANG_BITS(2), .TAG_W(10)) u_small (
    .clk(clk), .rst_n(rst_n), .seed(SEED), .key_ready(s_kr),
    .in_valid(s_iv), .in_ready(s_ir), .in_addr(s_ia), .in_tag(s_it),
    .out_valid(s_ov), .out_ready(s_or), .out_addr(s_oa), .out_tag(s_ot));

  // default instance
  logic b_kr, b_iv, b_ir, b_ov, b_or;
  logic [27:0] b_ia, b_oa;
  logic        b_it, b_ot;
  rubix_s u_big (
    .clk(clk), .rst_n(rst_n), .seed(SEED), .key_ready(b_kr),
    .in_valid(b_iv), .in_ready(b_ir), .in_addr(b_ia), .in_tag(b_it),
    .out_valid(b_ov), .out_ready(b_or), .out_addr(b_oa), .out_tag(b_ot));

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect small-instance outputs
  int  map_of [1024];
  bit  used [1024];
  int  s_got = 0;
  always @(posedge clk) if (rst_n && s_ov && s_or) begin
    map_of[s_ot] = int'(s_oa);
    s_got++;
  end

  logic [95:0] key;
  int lat;
  logic [27:0] exp_q [$];

  initial begin
    s_iv = 0; s_ia = 0; s_it = 0; s_or = 1;
    b_iv = 0; b_ia = 0; b_it = 0; b_or = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!s_kr && !s_ir, "not ready right after reset");
    @(negedge clk);
    check(!s_kr, "key not ready after 1 cycle");
    @(negedge clk);
    check(s_kr && b_kr, "key ready after 2 cycles");
    key = {xs(SEED)[31:0], SEED};

    // latency on the big instance
    b_iv = 1; b_ia = 28'h0ABC_DE7; b_it = 1;
    @(negedge clk); b_iv = 0; lat = 1;
    while (!b_ov && lat < 10) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("latency %0d", lat));
    check(b_oa == {26'(cipher(64'h0ABC_DE7 >> 2, key, 26)), 2'b11} && b_ot == 1, "model, single");
    @(negedge clk);

    // small instance: all addresses, random output stalls
    fork
      begin
        for (int a = 0; a < 1024; a++) begin
          s_iv = 1; s_ia = 10'(a); s_it = 10'(a);
          @(posedge clk);
          while (!s_ir) @(posedge clk);
          #1;
        end
        s_iv = 0;
      end
      begin
        while (s_got < 1024) begin @(negedge clk); s_or = ($urandom % 3) != 0; end
        s_or = 1;
      end
    join
    for (int a = 0; a < 1024; a++) begin
      check(!used[map_of[a]], $sformatf("collision at %0d", map_of[a]));
      used[map_of[a]] = 1;
      check((map_of[a] & 3) == (a & 3), "line-in-gang bits kept");
      check((map_of[a] >> 2) == (map_of[a & ~3] >> 2), "gang stays together");
      check(64'(map_of[a] >> 2) == cipher(64'(a >> 2), key, 8), "small model");
    end

    // big instance: random stream with stalls vs model
    fork
      begin
        for (int n = 0; n < 3000; n++) begin
          b_iv = 1; b_ia = 28'($urandom); b_it = 1'($urandom);
          @(posedge clk);
          while (!b_ir) @(posedge clk);
          exp_q.push_back({26'(cipher(64'(b_ia >> 2), key, 26)), b_ia[1:0]});
          #1;
        end
        b_iv = 0;
      end
      begin
        int got = 0;
        while (got < 3000) begin
          @(negedge clk);
          b_or = ($urandom % 4) != 0;
          #2;
          if (b_ov && b_or) begin
            @(posedge clk);
            check(exp_q.size() > 0 && b_oa == exp_q.pop_front(), "big stream vs model");
            got++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
