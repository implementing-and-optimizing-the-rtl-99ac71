// tb_reduce_sum: self-checking test of the Reduce (n) (0) (acc + x) node
// with n = 4. Phase 1 streams 10 groups at full rate and checks that the
// 10 sums leave within 4*10 + 3 cycles (one sum per n cycles). Phase 2
// streams 200 groups with random input gaps and random output stalls.
// Expected sums are formed from the stimulus in 64-bit arithmetic.
module tb_reduce_sum;
  import sdpa_pkg::*;
  localparam int NR = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  fx_t  in_data, out_data;
  int   checks = 0, failures = 0;
  fx_t  expq[$];
  int   n_send = 0, n_out = 0, cyc;
  bit   gaps = 0;
  longint grp;
  int     gcnt = 0;

  reduce_sum #(.N_RED(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_data  <= '0;
      grp       = 0;
    end else begin
      if (out_valid && out_ready) begin
        checks++;
        n_out++;
        if (expq.size() == 0 || expq[0] !== out_data) begin
          failures++;
          if (failures < 10) $display("sum got %0d want %0d", out_data, expq.size() ? expq[0] : 0);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      if (!in_valid || in_ready) begin
        if (n_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          fx_t t;
          t = fx_t'($signed($urandom) >>> 6);
          in_valid <= 1'b1;
          in_data  <= t;
          n_send--;
          grp += longint'(t);
          gcnt++;
          if (gcnt == NR) begin
            expq.push_back(fx_t'(grp));
            grp  = 0;
            gcnt = 0;
          end
        end else in_valid <= 1'b0;
      end
    end
  end

  initial begin
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    n_send = 10 * NR;
    cyc = 0;
    while (n_out < 10) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc > 10 * NR + 3) begin
      failures++;
      $display("rate: 10 sums took %0d cycles", cyc);
    end
    gaps = 1;
    n_send = 200 * NR;
    while (n_out < 210) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
