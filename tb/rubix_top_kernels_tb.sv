// rubix_top_kernels_tb: the synthetic-kernel experiment on rubix_top.
//
// Three kernels (stream, stride-64, random) each make 1M reads over a 4 MB
// footprint in a 4 GB single-bank memory with 4 KB rows; a row with 64 or
// more activations is a hot row (see kernel_harness). Rubix-S and Rubix-D
// run side by side, each with gangs of 1, 2 and 4 lines (GS1, GS2, GS4).
// Expected from the arithmetic of the experiment:
//   plain mapping: stream 0 hot rows (16 activations per row), stride-64
//   and random all 1024 rows hot (about 1000 activations per row);
//   GS1 randomized: the 64K lines spread over about 62K rows, so a row
//   holds 1 to 3 lines of 16 accesses each and no row, or at most a
//   couple, is hot;
//   stream at any gang size: a gang is read in one burst, 16 activations
//   per gang, so no row is hot;
//   stride-64 and random with larger gangs: a gang collects the
//   activations of all its lines (64 for GS4), so hot rows come back. This
//   is the trade against row-buffer hits that the gang size sets, and it is
//   printed, not checked.
// Checks: every read returns its data; the plain-mapping counts above; at
// most 2 hot rows, from the host's reads, for GS1 and for stream; the GS1
// footprint occupies at least 60,000 distinct rows; Rubix-D swaps gangs;
// Rubix-S never does.
// Also printed, not checked: hot rows with the Rubix-D swap traffic
// counted. Every v-group starts its roll at Ptr = 0 and all advance at
// about the same pace, so the source rows of the swaps of all v-groups are
// the same few physical rows. Each such row takes two activations per
// v-group, and with 1M activations in one bank some rows near the pointers
// reach the threshold from swap traffic alone.
module rubix_top_kernels_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fin  [3][2];
  int   c    [3][2];
  int   e    [3][2];
  int   sw   [3][2];
  int   hot  [3][2][3];
  int   hall [3][2][3];
  int   base [3][2][3];
  int   rows [3][2][3];
  int checks, failures;
  string kname [3] = '{"stream", "stride-64", "random"};

  for (genvar g = 0; g < 3; g++) begin : g_gs
    for (genvar d = 0; d < 2; d++) begin : g_mode
      kernel_harness #(.DYN(d), .GB(g)) h (
        .clk(clk), .rst_n(rst_n), .finished(fin[g][d]), .checks(c[g][d]), .failures(e[g][d]),
        .hot(hot[g][d]), .hot_all(hall[g][d]), .base_hot(base[g][d]), .rows(rows[g][d]),
        .n_swap(sw[g][d]));
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sum(input int v [3][2]);
    int t = 0;
    foreach (v[i, j]) t += v[i][j];
    return t;
  endfunction

  initial begin
    #200000000;
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(e) + 1);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      foreach (fin[i, j]) all_done &= fin[i][j];
    end while (!all_done);
    checks = sum(c); failures = sum(e);
    for (int g = 0; g < 3; g++) begin
      $display("GS%0d:", 1 << g);
      for (int k = 0; k < 3; k++) begin
        $display("  %-9s hot rows: plain %0d  Rubix-S %0d  Rubix-D %0d (%0d with swap traffic)   rows holding footprint: Rubix-S %0d  Rubix-D %0d",
                 kname[k], base[g][0][k], hot[g][0][k], hot[g][1][k], hall[g][1][k], rows[g][0][k], rows[g][1][k]);
        check(base[g][0][k] == base[g][1][k], "both mappings see the same plain-mapping counts");
        if (k == 0) check(base[g][0][k] == 0, "stream: no hot rows under the plain mapping");
        else        check(base[g][0][k] == 1024, $sformatf("%s: all 1024 rows hot under the plain mapping", kname[k]));
        check(hall[g][0][k] == hot[g][0][k], "Rubix-S has no swap traffic");
        if (g == 0 || k == 0) begin
          check(hot[g][0][k] <= 2, $sformatf("GS%0d %s: Rubix-S hot rows %0d", 1 << g, kname[k], hot[g][0][k]));
          check(hot[g][1][k] <= 2, $sformatf("GS%0d %s: Rubix-D hot rows %0d", 1 << g, kname[k], hot[g][1][k]));
        end
        if (g == 0) begin
          check(rows[g][0][k] >= 60000, $sformatf("%s: Rubix-S footprint rows %0d", kname[k], rows[g][0][k]));
          check(rows[g][1][k] >= 60000, $sformatf("%s: Rubix-D footprint rows %0d", kname[k], rows[g][1][k]));
        end
      end
      $display("  Rubix-D swaps: %0d", sw[g][1]);
      check(sw[g][1] > 0, "Rubix-D swapped gangs");
      check(sw[g][0] == 0, "Rubix-S never swaps");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
