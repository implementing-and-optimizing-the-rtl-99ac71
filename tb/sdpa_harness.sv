// sdpa_harness: drives one sdpa_memfree instance through one attention head
// at full rate (inputs always valid, output always ready) and reports the
// cycle count, the output errors against a double-precision reference and
// the largest number of words any of its FIFOs held at once.
//
// Used by tb_sdpa_fifo_depth to compare the pipeline with depth-2 FIFOs
// against the same pipeline with very deep FIFOs. Q, K and V elements are
// uniform in [-1, 1) in Q16.16; tolerance on each output is 4e-3.
// Interface: pulse start for one cycle after reset; done rises and stays
// high when the last output element has been checked.
module sdpa_harness #(
  parameter int N     = 8,
  parameter int D     = 4,
  parameter int DEPTH = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   done,
  output longint cycles,
  output int     checks,
  output int     errors,
  output int     max_occ
);
  import sdpa_pkg::*;
  localparam longint TOTAL = longint'(N) * N * D;

  logic        q_valid, q_ready, k_valid, k_ready, v_valid, v_ready, o_valid, o_ready;
  fx_t         q_data, k_data, o_data;
  fx_t [D-1:0] v_data;
  fx_t    Qm[N*D], Km[N*D], Vm[N*D];
  real    Oref[N*D];
  longint qidx, kidx, vidx, oidx;
  logic   running;

  sdpa_memfree #(.N(N), .D(D), .FIFO_DEPTH(DEPTH)) dut (.*);

  initial begin
    for (int t = 0; t < N * D; t++) begin
      Qm[t] = fx_t'($signed($urandom) >>> 15);
      Km[t] = fx_t'($signed($urandom) >>> 15);
      Vm[t] = fx_t'($signed($urandom) >>> 15);
    end
    for (int i = 0; i < N; i++) begin
      real s[N];
      real mx, sum;
      for (int j = 0; j < N; j++) begin
        s[j] = 0.0;
        for (int k = 0; k < D; k++)
          s[j] += (real'(Qm[i*D+k]) / 65536.0) * (real'(Km[j*D+k]) / 65536.0);
      end
      mx = s[0];
      for (int j = 1; j < N; j++) if (s[j] > mx) mx = s[j];
      sum = 0.0;
      for (int j = 0; j < N; j++) begin
        s[j] = $exp(s[j] - mx);
        sum += s[j];
      end
      for (int k = 0; k < D; k++) begin
        real o;
        o = 0.0;
        for (int j = 0; j < N; j++) o += s[j] / sum * (real'(Vm[j*D+k]) / 65536.0);
        Oref[i*D+k] = o;
      end
    end
  end

  always_comb begin
    q_data = Qm[int'((qidx / (N*D)) * D + qidx % D)];
    k_data = Km[int'(((kidx / D) % N) * D + kidx % D)];
    for (int k = 0; k < D; k++) v_data[k] = Vm[int'((vidx % N) * D + k)];
    q_valid = running && (qidx < TOTAL);
    k_valid = running && (kidx < TOTAL);
    v_valid = running && (vidx < longint'(N) * N);
    o_ready = 1'b1;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      qidx    <= 0;
      kidx    <= 0;
      vidx    <= 0;
      oidx    <= 0;
      cycles  <= 0;
      checks  <= 0;
      errors  <= 0;
      max_occ <= 0;
    end else begin
      if (start) running <= 1'b1;
      if (running && !done) cycles <= cycles + 1;
      if (q_valid && q_ready) qidx <= qidx + 1;
      if (k_valid && k_ready) kidx <= kidx + 1;
      if (v_valid && v_ready) vidx <= vidx + 1;
      if (o_valid && o_ready) begin
        real got;
        got = real'(o_data) / 65536.0;
        checks <= checks + 1;
        if (oidx >= N * D || (got - Oref[int'(oidx)]) > 4e-3 || (Oref[int'(oidx)] - got) > 4e-3)
          errors <= errors + 1;
        oidx <= oidx + 1;
        if (oidx == N * D - 1) done <= 1'b1;
      end
      begin
        int occ;
        occ = 0;
        if (int'(dut.u_fifo_prod.count) > occ) occ = int'(dut.u_fifo_prod.count);
        if (int'(dut.u_fifo_s.count)    > occ) occ = int'(dut.u_fifo_s.count);
        if (int'(dut.u_fifo_pair.count) > occ) occ = int'(dut.u_fifo_pair.count);
        if (int'(dut.u_fifo_r.count)    > occ) occ = int'(dut.u_fifo_r.count);
        if (int'(dut.u_fifo_rr.count)   > occ) occ = int'(dut.u_fifo_rr.count);
        if (int'(dut.u_fifo_l.count)    > occ) occ = int'(dut.u_fifo_l.count);
        if (occ > max_occ) max_occ <= occ;
      end
    end
  end
endmodule
