// tb_vec_serializer: self-checking test of the vector-to-element
// serializer with D = 4. 300 random vectors are sent with random gaps and
// random output stalls; their elements must come out in order, element 0
// first, each exactly once. A full-rate phase checks one element per cycle.
module tb_vec_serializer;
  import sdpa_pkg::*;
  localparam int D = 4;
  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready, out_valid, out_ready;
  fx_t [D-1:0] in_data;
  fx_t         out_data;
  int   checks = 0, failures = 0;
  fx_t  expq[$];
  int   n_send = 0, n_out = 0, cyc;
  bit   gaps = 0;

  vec_serializer #(.D(D)) dut (.*);

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
          if (failures < 10) $display("element got %0d want %0d", out_data, expq.size() ? expq[0] : 0);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      if (!in_valid || in_ready) begin
        if (n_send > 0 && (!gaps || $urandom % 3 != 0)) begin
          fx_t [D-1:0] t;
          for (int k = 0; k < D; k++) begin
            t[k] = fx_t'($urandom);
            expq.push_back(t[k]);
          end
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
    n_send = 10;
    cyc = 0;
    while (n_out < 10 * D) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc > 10 * D + 3) begin
      failures++;
      $display("rate: %0d elements took %0d cycles", 10 * D, cyc);
    end
    gaps = 1;
    n_send = 300;
    while (n_out < 310 * D) begin
      @(negedge clk);
      out_ready = ($urandom % 4 != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
