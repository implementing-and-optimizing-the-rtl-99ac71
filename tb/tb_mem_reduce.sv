// tb_mem_reduce: self-checking test of the MemReduce (N) (0-vector)
// (s*acc + x*v) node with D = 4 lanes and N = 5. The (delta, e) pair stream
// and the value-row stream are driven independently with random gaps, the
// output with random stalls. Each output vector is compared lane by lane
// with l_j = l_(j-1) * delta_j + e_j * v_j evaluated in real arithmetic
// (tolerance 1e-3). A full-rate phase checks one token per cycle.
module tb_mem_reduce;
  import sdpa_pkg::*;
  localparam int D  = 4;
  localparam int NR = 5;
  logic        clk = 0, rst_n = 0;
  logic        p_valid, p_ready, v_valid, v_ready, out_valid, out_ready;
  scan_pair_t  p_data;
  fx_t [D-1:0] v_data, out_data;
  int   checks = 0, failures = 0;
  real  pd[$], pe[$];
  real  vq[$];     // value rows, D entries each
  real  expq[$];   // expected output rows, D entries each
  int   np_send = 0, nv_send = 0, n_out = 0, cyc;
  bit   gaps = 0;
  real  acc[D];
  int   gcnt = 0;

  mem_reduce #(.D(D), .N_RED(NR)) dut (.*);

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
      p_valid <= 1'b0;
      v_valid <= 1'b0;
      p_data  <= '0;
      v_data  <= '0;
      foreach (acc[k]) acc[k] = 0.0;
    end else begin
      if (out_valid && out_ready) begin
        n_out++;
        for (int k = 0; k < D; k++) begin
          real got;
          got = real'(out_data[k]) / 65536.0;
          checks++;
          if (expq.size() <= k || (got - expq[k]) > 1e-3 || (expq[k] - got) > 1e-3) begin
            failures++;
            if (failures < 10) $display("lane %0d got %f want %f", k, got, expq.size() > k ? expq[k] : 0.0);
          end
        end
        repeat (D) if (expq.size() != 0) void'(expq.pop_front());
      end
      // Model: update on every joined token, in order.
      if (p_valid && p_ready) begin
        real d, e;
        d = pd.pop_front();
        e = pe.pop_front();
        for (int k = 0; k < D; k++) acc[k] = acc[k] * d + e * vq.pop_front();
        gcnt++;
        if (gcnt == NR) begin
          for (int k = 0; k < D; k++) expq.push_back(acc[k]);
          foreach (acc[k]) acc[k] = 0.0;
          gcnt = 0;
        end
      end
      if (!p_valid || p_ready) begin
        if (np_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          scan_pair_t t;
          t.delta = fx_t'($urandom % 65537);
          t.e     = fx_t'($urandom % 65537);
          p_valid <= 1'b1;
          p_data  <= t;
          pd.push_back(real'(t.delta) / 65536.0);
          pe.push_back(real'(t.e) / 65536.0);
          np_send--;
        end else p_valid <= 1'b0;
      end
      if (!v_valid || v_ready) begin
        if (nv_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          fx_t [D-1:0] t;
          for (int k = 0; k < D; k++) begin
            t[k] = fx_t'($signed($urandom) >>> 14);
            vq.push_back(real'(t[k]) / 65536.0);
          end
          v_valid <= 1'b1;
          v_data  <= t;
          nv_send--;
        end else v_valid <= 1'b0;
      end
    end
  end

  initial begin
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    np_send = 8 * NR;
    nv_send = 8 * NR;
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
    np_send = 200 * NR;
    nv_send = 200 * NR;
    while (n_out < 208) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
