// tb_scan_max_exp: self-checking test of the Scan (N) (-inf) node with
// N = 6. Random scores in [-8, 8) are sent with random gaps and stalls. For
// every score the pair (delta, e) is compared with the running-max
// recurrence evaluated in real arithmetic:
//   m = max(m_old, s), delta = e^(m_old - m), e = e^(s - m), m_old = -inf
// at the start of each row (delta = 0 exactly). Tolerance 5e-4. It also
// checks that e is exactly 1 when the score is the new maximum, that the
// maximum grew inside a row (a rescale with delta < 1) many times, and a
// full-rate phase of one score per cycle.
module tb_scan_max_exp;
  import sdpa_pkg::*;
  localparam int NS = 6;
  logic       clk = 0, rst_n = 0;
  logic       in_valid, in_ready, out_valid, out_ready;
  fx_t        in_data;
  scan_pair_t out_data;
  int   checks = 0, failures = 0;
  real  exp_d[$], exp_e[$];
  bit   exp_one[$];
  int   n_send = 0, n_out = 0, cyc, n_rescale = 0;
  bit   gaps = 0;
  real  m = 0.0;
  int   pos = 0;

  scan_max_exp #(.N_SCAN(NS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit far(real a, real b);
    return (a - b) > 5e-4 || (b - a) > 5e-4;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_data  <= '0;
    end else begin
      if (out_valid && out_ready) begin
        real gd, ge;
        gd = real'(out_data.delta) / 65536.0;
        ge = real'(out_data.e) / 65536.0;
        checks++;
        n_out++;
        if (exp_d.size() == 0 || far(gd, exp_d[0]) || far(ge, exp_e[0])
            || (exp_one[0] && out_data.e !== FX_ONE)) begin
          failures++;
          if (failures < 10) $display("pair got (%f,%f) want (%f,%f)", gd, ge, exp_d[0], exp_e[0]);
        end
        if (exp_d[0] > 0.0 && exp_d[0] < 0.999) n_rescale++;
        if (exp_d.size() != 0) begin
          void'(exp_d.pop_front());
          void'(exp_e.pop_front());
          void'(exp_one.pop_front());
        end
      end
      if (!in_valid || in_ready) begin
        if (n_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          fx_t t;
          real s, mn;
          t  = fx_t'($signed($urandom) >>> 12);
          s  = real'(t) / 65536.0;
          mn = (pos == 0 || s > m) ? s : m;
          exp_d.push_back(pos == 0 ? 0.0 : $exp(m - mn));
          exp_e.push_back($exp(s - mn));
          exp_one.push_back(s == mn);
          m   = mn;
          pos = (pos == NS - 1) ? 0 : pos + 1;
          in_valid <= 1'b1;
          in_data  <= t;
          n_send--;
        end else in_valid <= 1'b0;
      end
    end
  end

  initial begin
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    n_send = 60;
    cyc = 0;
    while (n_out < 60) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc > 60 + 3) begin
      failures++;
      $display("rate: 60 scores took %0d cycles", cyc);
    end
    gaps = 1;
    n_send = 1200;
    while (n_out < 1260) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
    end
    checks++;
    if (n_rescale < 10) begin
      failures++;
      $display("running maximum rarely grew inside a row: %0d", n_rescale);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
