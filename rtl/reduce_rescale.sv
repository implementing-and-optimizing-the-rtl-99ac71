// reduce_rescale: the Reduce (N) (0) (f: acc, (s, x) -> acc * s + x) node
// that keeps the running softmax denominator of a row,
//   r_ij = r_i(j-1) * Delta_ij + e_ij,   r_i(-1) = 0.
//
// Its input tokens are the (delta, e) pairs from the Scan node. After N
// pairs (one row of scores) r_iN is registered on out_data with out_valid
// and the accumulator restarts at 0. Input is accepted whenever the output
// register is empty or being emptied: one pair per cycle, the result one
// cycle after the row's last pair. Synchronous active-low reset.
//
// The node's function and its reset value 0 are the paper's; the
// handshake and the registered output are this design's.
module reduce_rescale
  import sdpa_pkg::*;
#(
  parameter int unsigned N_RED = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  scan_pair_t in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output fx_t        out_data
);
  localparam int unsigned CW = (N_RED > 1) ? $clog2(N_RED) : 1;

  fx_t           acc;
  logic [CW-1:0] cnt;
  logic          fire;
  fx_t           nxt;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign nxt      = fx_mul(acc, in_data.delta) + in_data.e;

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
          out_data  <= nxt;
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= nxt;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
