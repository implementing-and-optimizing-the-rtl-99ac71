// tb_short_fifo: self-checking test of the depth-2 FIFO.
// Phase 1 streams 64 words with both sides always enabled and checks that
// they pass at one word per cycle. Phase 2 holds the output and checks that
// exactly DEPTH words are taken before in_ready falls. Phase 3 streams 2000
// random words with random valid and ready and checks order and contents
// against a queue model.
module tb_short_fifo;
  import sdpa_pkg::*;
  localparam int DEPTH = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  fx_t  in_data, out_data;
  int   checks = 0, failures = 0;
  fx_t  model[$];
  int   n_in, n_out, cyc;
  bit   gaps;

  short_fifo #(.T(fx_t), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Driver (holds a word until it is taken) and checker.
  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_data  <= '0;
    end else begin
      if (out_valid && out_ready) begin
        checks++;
        n_out++;
        if (model.size() == 0 || model[0] !== out_data) begin
          failures++;
          if (failures < 10) $display("FIFO order/data mismatch");
        end
        if (model.size() != 0) void'(model.pop_front());
      end
      if (in_valid && in_ready) begin
        model.push_back(in_data);
        n_in--;
      end
      if (!in_valid || in_ready) begin
        in_valid <= ((in_valid && in_ready) ? n_in > 0 : n_in > 0) && (!gaps || ($urandom % 3 != 0));
        in_data  <= fx_t'($urandom);
      end
    end
  end

  initial begin
    n_in = 0; n_out = 0; gaps = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 1: full rate
    @(negedge clk);
    n_in = 64;
    cyc = 0;
    while (n_out < 64) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc > 64 + 3) begin
      failures++;
      $display("throughput: 64 words took %0d cycles", cyc);
    end
    // Phase 2: output blocked, count accepted words
    @(negedge clk);
    out_ready = 0;
    n_in = 10;
    repeat (10) @(negedge clk);
    checks++;
    if (model.size() != DEPTH || in_ready !== 1'b0) begin
      failures++;
      $display("capacity: held %0d words, in_ready=%0b", model.size(), in_ready);
    end
    out_ready = 1;
    while (n_in > 0 || model.size() > 0) @(negedge clk);
    // Phase 3: random traffic
    gaps = 1;
    n_in = 2000;
    while (n_in > 0 || model.size() > 0) begin
      out_ready = 1'($urandom);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
