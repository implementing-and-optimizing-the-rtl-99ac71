// tb_reduce_rescale: self-checking test of the Reduce (N) (0)
// (acc*s + x) node with N = 5, i.e. the running softmax denominator
// r_j = r_(j-1) * delta_j + e_j. Random pairs with delta and e in [0, 1]
// are sent with random gaps and stalls; each row result is compared with the
// same recurrence evaluated in real arithmetic (tolerance 1e-3). A full-rate
// phase checks one pair per cycle (8 rows within 8*5 + 3 cycles).
module tb_reduce_rescale;
  import sdpa_pkg::*;
  localparam int NR = 5;
  logic       clk = 0, rst_n = 0;
  logic       in_valid, in_ready, out_valid, out_ready;
  scan_pair_t in_data;
  fx_t        out_data;
  int   checks = 0, failures = 0;
  real  expq[$];
  int   n_send = 0, n_out = 0, cyc;
  bit   gaps = 0;
  real  racc = 0.0;
  int   gcnt = 0;

  reduce_rescale #(.N_RED(NR)) dut (.*);

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
        real got;
        got = real'(out_data) / 65536.0;
        checks++;
        n_out++;
        if (expq.size() == 0 || (got - expq[0]) > 1e-3 || (expq[0] - got) > 1e-3) begin
          failures++;
          if (failures < 10) $display("r got %f want %f", got, expq.size() ? expq[0] : 0.0);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      if (!in_valid || in_ready) begin
        if (n_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          scan_pair_t t;
          t.delta = fx_t'($urandom % 65537);
          t.e     = fx_t'($urandom % 65537);
          in_valid <= 1'b1;
          in_data  <= t;
          n_send--;
          racc = racc * (real'(t.delta) / 65536.0) + real'(t.e) / 65536.0;
          gcnt++;
          if (gcnt == NR) begin
            expq.push_back(racc);
            racc = 0.0;
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
    n_send = 8 * NR;
    cyc = 0;
    while (n_out < 8) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc > 8 * NR + 3) begin
      failures++;
      $display("rate: 8 rows took %0d cycles", cyc);
    end
    gaps = 1;
    n_send = 200 * NR;
    while (n_out < 208) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
