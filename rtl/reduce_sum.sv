// reduce_sum: the Reduce (n) (0) (f: acc, x -> acc + x) node. With n = d it
// sums the d products q_ik * k_kj of one score into s_ij.
//
// The accumulator starts at 0. Each accepted input is added; the n-th input
// of a group completes the sum, which is registered on out_data with
// out_valid and the accumulator restarts at 0. Input is accepted whenever
// the output register is empty or being emptied, so a full-rate input stream
// gives one output every n cycles, one cycle after the group's last input.
// Synchronous active-low reset.
//
// The node's function and its reset value 0 are the paper's; the
// handshake and the registered output are this design's.
module reduce_sum
  import sdpa_pkg::*;
#(
  parameter int unsigned N_RED = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fx_t  in_data,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  out_data
);
  localparam int unsigned CW = (N_RED > 1) ? $clog2(N_RED) : 1;

  fx_t           acc;
  logic [CW-1:0] cnt;
  logic          fire;
  fx_t           sum;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign sum      = acc + in_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (cnt == CW'(N_RED-1)) begin
          out_data  <= sum;
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= sum;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
