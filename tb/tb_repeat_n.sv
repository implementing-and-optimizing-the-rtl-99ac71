// tb_repeat_n: self-checking test of the Repeat (n) node with n = 3.
// 300 random tokens are sent with random gaps and random output stalls;
// each must appear exactly 3 times in a row, in order. A full-rate phase
// checks one copy per cycle (30 copies of 10 tokens within 33 cycles).
module tb_repeat_n;
  import sdpa_pkg::*;
  localparam int NR = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  fx_t  in_data, out_data;
  int   checks = 0, failures = 0;
  fx_t  expq[$];
  int   n_send = 0, n_out = 0, cyc;
  bit   gaps = 0;

  repeat_n #(.T(fx_t), .N_REP(NR)) dut (.*);

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
    end else begin
      if (out_valid && out_ready) begin
        checks++;
        n_out++;
        if (expq.size() == 0 || expq[0] !== out_data) begin
          failures++;
          if (failures < 10) $display("copy got %0d want %0d", out_data, expq.size() ? expq[0] : 0);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      if (!in_valid || in_ready) begin
        if (n_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          fx_t t;
          t = fx_t'($urandom);
          in_valid <= 1'b1;
          in_data  <= t;
          n_send--;
          repeat (NR) expq.push_back(t);
        end else in_valid <= 1'b0;
      end
    end
  end

  initial begin
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    n_send = 10;
    cyc = 0;
    while (n_out < 10 * NR) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc > 10 * NR + 3) begin
      failures++;
      $display("rate: %0d copies took %0d cycles", 10 * NR, cyc);
    end
    gaps = 1;
    n_send = 300;
    while (n_out < 310 * NR) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
