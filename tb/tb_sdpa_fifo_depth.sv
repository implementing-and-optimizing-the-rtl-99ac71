// tb_sdpa_fifo_depth: the FIFO-depth experiment for the memory-free
// attention pipeline. For several sequence lengths N (d = 8), one pipeline
// with the depth-2 FIFOs of the design runs next to one whose FIFOs are 64
// deep, which stands in for unbounded FIFOs (peak-throughput reference).
// Both run one head at full rate. Checks, for every N:
//   * all outputs of both agree with a double-precision attention;
//   * the depth-2 pipeline needs no more cycles than the deep one, and at
//     most N*N*d + d + 32 cycles (full throughput);
//   * the deep pipeline's FIFOs never hold more than 2 words, at any N:
//     the intermediate storage needed does not grow with N.
module tb_sdpa_fifo_depth;
  localparam int NCFG = 3;
  localparam int D    = 8;
  localparam int NS [NCFG] = '{4, 16, 48};

  logic clk = 0, rst_n = 0, start = 0;
  logic   done_s [NCFG], done_d [NCFG];
  longint cyc_s [NCFG], cyc_d [NCFG];
  int     chk_s [NCFG], chk_d [NCFG], err_s [NCFG], err_d [NCFG], occ_s [NCFG], occ_d [NCFG];
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    sdpa_harness #(.N(NS[c]), .D(D), .DEPTH(2)) u_short (
      .clk, .rst_n, .start, .done(done_s[c]), .cycles(cyc_s[c]),
      .checks(chk_s[c]), .errors(err_s[c]), .max_occ(occ_s[c]));
    sdpa_harness #(.N(NS[c]), .D(D), .DEPTH(64)) u_deep (
      .clk, .rst_n, .start, .done(done_d[c]), .cycles(cyc_d[c]),
      .checks(chk_d[c]), .errors(err_d[c]), .max_occ(occ_d[c]));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    do begin
      @(negedge clk);
      all_done = 1;
      for (int c = 0; c < NCFG; c++) all_done &= done_s[c] && done_d[c];
    end while (!all_done);
    for (int c = 0; c < NCFG; c++) begin
      longint lim;
      lim = longint'(NS[c]) * NS[c] * D + D + 32;
      $display("N=%0d d=%0d: depth 2: %0d cycles, peak occupancy %0d; depth 64: %0d cycles, peak occupancy %0d; N*N*d=%0d",
               NS[c], D, cyc_s[c], occ_s[c], cyc_d[c], occ_d[c], longint'(NS[c]) * NS[c] * D);
      checks += chk_s[c] + chk_d[c];
      failures += err_s[c] + err_d[c];
      checks++;
      if (chk_s[c] != NS[c] * D || chk_d[c] != NS[c] * D) failures++;
      checks++;
      if (cyc_s[c] > cyc_d[c] || cyc_s[c] > lim) begin
        failures++;
        $display("  depth-2 pipeline slower than the reference or than full rate");
      end
      checks++;
      if (occ_d[c] > 2) begin
        failures++;
        $display("  deep FIFOs filled beyond 2 words");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
