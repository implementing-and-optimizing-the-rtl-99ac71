// tb_sdpa_memfree_full: end-to-end test of the memory-free attention pipeline with the top at its default parameters (N = 128, d = 64).
//
// Random Q, K and V (elements uniform in [-1, 1), quantised to the Q16.16
// format) are streamed in the order the top expects, and every output
// element is compared with O = softmax(Q K^T) V computed in real arithmetic
// with the ordinary (row-maximum, divide-first) softmax, tolerance 4e-3.
// Head 1 runs with every input always valid and the output always ready and
// must finish within N*N*d + d + 32 cycles: full throughput, one q/k pair
// per cycle. Head 2 uses new data with random gaps on all three inputs (the value
// stream offered in one cycle of 2d on average, so that it is the bottleneck) and
// random stalls on the output.
// The test also counts how often each mechanism of the pipeline acted and
// fails if one never did: a rescale by a growing running maximum, a full
// depth-2 FIFO holding back its producer, a repeat of the row sum, an output stall and the two consumers of the forked (delta, e) stream
// accepting in different cycles.
module tb_sdpa_memfree_full;
  import sdpa_pkg::*;
  localparam int N = 128;
  localparam int D = 64;
  localparam int HEADS = 2;
  localparam longint TOTAL = longint'(N) * N * D;

  logic        clk = 0, rst_n = 0;
  logic        q_valid, q_ready, k_valid, k_ready, v_valid, v_ready, o_valid, o_ready;
  fx_t         q_data, k_data, o_data;
  fx_t [D-1:0] v_data;
  int          checks = 0, failures = 0;

  fx_t Qm[N*D], Km[N*D], Vm[N*D];
  real Oref[N*D];
  longint qidx, kidx, vidx, oidx;
  bit  gaps = 0;
  int  head = 0;
  longint cyc;
  int  n_rescale = 0, n_fifo_full = 0, n_repeat = 0, n_out_stall = 0, n_fork_split = 0;

  sdpa_memfree dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_head();
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
  endtask

  // Stream drivers: each holds its token until it is taken.
  always_comb begin
    q_data = Qm[int'((qidx / (N*D)) * D + qidx % D)];
    k_data = Km[int'(((kidx / D) % N) * D + kidx % D)];
    for (int k = 0; k < D; k++) v_data[k] = Vm[int'((vidx % N) * D + k)];
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      q_valid <= 1'b0;
      k_valid <= 1'b0;
      v_valid <= 1'b0;
    end else begin
      if (q_valid && q_ready) qidx <= qidx + 1;
      if (k_valid && k_ready) kidx <= kidx + 1;
      if (v_valid && v_ready) vidx <= vidx + 1;
      if (!q_valid || q_ready)
        q_valid <= ((qidx + longint'(q_valid && q_ready)) < TOTAL) && (!gaps || $urandom % 5 != 0);
      if (!k_valid || k_ready)
        k_valid <= ((kidx + longint'(k_valid && k_ready)) < TOTAL) && (!gaps || $urandom % 5 != 0);
      if (!v_valid || v_ready)
        v_valid <= ((vidx + longint'(v_valid && v_ready)) < longint'(N) * N) && (!gaps || $urandom % (2 * D) == 0);
    end
  end

  // Output checker and mechanism counters.
  always @(posedge clk) begin
    if (rst_n) begin
      if (o_valid && o_ready) begin
        real got;
        got = real'(o_data) / 65536.0;
        checks++;
        if (oidx >= N * D || (got - Oref[int'(oidx)]) > 4e-3 || (Oref[int'(oidx)] - got) > 4e-3) begin
          failures++;
          if (failures < 10) $display("head %0d o[%0d] got %f want %f", head, oidx, got,
                                      oidx < N * D ? Oref[int'(oidx)] : 0.0);
        end
        oidx <= oidx + 1;
      end
      if (o_valid && !o_ready) n_out_stall++;
      if (dut.pr_valid && dut.pr_ready && dut.pr_data.delta != '0 && dut.pr_data.delta < FX_ONE)
        n_rescale++;
      if ((dut.prod_valid && !dut.prod_ready) || (dut.s_valid && !dut.s_ready)
          || (dut.pr_valid && !dut.pr_ready) || (dut.r_valid && !dut.r_ready)
          || (dut.rr_valid && !dut.rr_ready) || (dut.l_valid && !dut.l_ready)) n_fifo_full++;
      if (dut.rr_valid && dut.rr_ready) n_repeat++;
      if (dut.u_fork.taken0 || dut.u_fork.taken1) n_fork_split++;
    end
  end

  initial begin
    qidx = 0; kidx = 0; vidx = 0; oidx = 0;
    o_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (head = 1; head <= HEADS; head++) begin
      make_head();
      gaps = (head > 1);
      @(negedge clk);
      qidx = 0; kidx = 0; vidx = 0; oidx = 0;
      cyc = 0;
      while (oidx < N * D) begin
        @(negedge clk);
        cyc++;
        if (gaps) o_ready = ($urandom % 4 != 0);
      end
      o_ready = 1;
      $display("head %0d: %0d cycles for N=%0d d=%0d (N*N*d = %0d)", head, cyc, N, D, TOTAL);
      if (head == 1) begin
        checks++;
        if (cyc > TOTAL + D + 32) begin
          failures++;
          $display("throughput: head took %0d cycles, limit %0d", cyc, TOTAL + D + 32);
        end
      end
      repeat (5) @(negedge clk);
    end
    $display("mechanisms: rescale=%0d fifo_full=%0d repeat=%0d out_stall=%0d fork_split=%0d",
             n_rescale, n_fifo_full, n_repeat, n_out_stall, n_fork_split);
    checks++;
    if (n_rescale == 0) begin failures++; $display("no rescale by a growing running maximum"); end
    checks++;
    if (n_fifo_full == 0) begin failures++; $display("no FIFO ever filled"); end
    checks++;
    if (n_repeat != HEADS * N * D) begin failures++; $display("repeat count %0d", n_repeat); end
    checks++;
    if (n_out_stall == 0) begin failures++; $display("no output stall"); end
    checks++;
    if (n_fork_split == 0) begin failures++; $display("fork consumers never split"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
