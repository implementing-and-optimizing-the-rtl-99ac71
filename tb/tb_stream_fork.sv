// tb_stream_fork: self-checking test of the two-way broadcast.
// 2000 random tokens are offered with random gaps while the two consumers
// accept at random, independent times. Each consumer must see every token
// exactly once and in order (a duplicate or a lost token shows up as a
// mismatch against the queue of tokens offered), and the case of one
// consumer taking a token before the other must occur.
module tb_stream_fork;
  import sdpa_pkg::*;
  localparam int NTOK = 2000;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out0_valid, out0_ready, out1_valid, out1_ready;
  fx_t  in_data, out0_data, out1_data;
  int   checks = 0, failures = 0;
  fx_t  q0[$], q1[$];
  int   n_load = 0, n_in = 0, n_split = 0;

  stream_fork #(.T(fx_t)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Driver: a new token is loaded only when the previous one was consumed;
  // every loaded token is expected once on each output.
  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_data  <= '0;
    end else begin
      if (out0_valid && out0_ready) begin
        checks++;
        if (q0.size() == 0 || q0[0] !== out0_data) failures++;
        if (q0.size() != 0) void'(q0.pop_front());
      end
      if (out1_valid && out1_ready) begin
        checks++;
        if (q1.size() == 0 || q1[0] !== out1_data) failures++;
        if (q1.size() != 0) void'(q1.pop_front());
      end
      if (in_valid && !in_ready && (out0_valid && out0_ready) != (out1_valid && out1_ready))
        n_split++;
      if (in_valid && in_ready) n_in++;
      if (!in_valid || in_ready) begin
        if (n_load < NTOK && ($urandom % 4 != 0)) begin
          fx_t t;
          t = fx_t'($urandom);
          in_valid <= 1'b1;
          in_data  <= t;
          q0.push_back(t);
          q1.push_back(t);
          n_load++;
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end

  initial begin
    out0_ready = 0; out1_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_in < NTOK) begin
      @(negedge clk);
      out0_ready = 1'($urandom);
      out1_ready = 1'($urandom);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (q0.size() != 0 || q1.size() != 0) begin
      failures++;
      $display("tokens left undelivered: %0d %0d", q0.size(), q1.size());
    end
    checks++;
    if (n_split == 0) begin
      failures++;
      $display("consumers never accepted in different cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
