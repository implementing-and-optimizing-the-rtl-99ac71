// scan_max_exp: the Scan (N) (-inf) node that replaces the row-wise maximum
// of softmax by a running maximum:
//   m_ij     = max(m_i(j-1), s_ij)
//   Delta_ij = e^(m_i(j-1) - m_ij)
//   e_ij     = e^(s_ij - m_ij)
// with m_i(-1) = -inf, so the first score of a row gives Delta = 0 and e = 1.
//
// One score s_ij in, one (delta, e) pair out, in the same cycle: the node is
// combinational from input to output (in_ready = out_ready, out_valid =
// in_valid) and only the state m and a position counter are registered.
// They change when a token is taken; after N scores the state returns to
// -inf for the next row. -inf is kept as "first of row" (counter at 0)
// rather than as a number. Both exponentials take a non-positive argument;
// differences that overflow the number format saturate to its most negative
// value, whose exponential is 0. Synchronous active-low reset.
//
// The recurrence is the paper's; the exponential approximation, the
// saturation and the handshake are this design's.
module scan_max_exp
  import sdpa_pkg::*;
#(
  parameter int unsigned N_SCAN = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  fx_t        in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output scan_pair_t out_data
);
  localparam int unsigned CW = (N_SCAN > 1) ? $clog2(N_SCAN) : 1;

  fx_t           m;
  logic [CW-1:0] cnt;
  logic          first;
  fx_t           m_new;

  function automatic fx_t sub_sat(fx_t a, fx_t b);
    logic signed [DATA_W:0] d;
    d = {a[DATA_W-1], a} - {b[DATA_W-1], b};
    if (d < $signed({FX_MIN[DATA_W-1], FX_MIN})) return FX_MIN;
    return fx_t'(d);
  endfunction

  assign first     = (cnt == '0);
  assign m_new     = first ? in_data : fx_max(m, in_data);
  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  always_comb begin
    out_data.delta = first ? '0 : fx_exp_neg(sub_sat(m, m_new));
    out_data.e     = fx_exp_neg(sub_sat(in_data, m_new));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m   <= FX_MIN;
      cnt <= '0;
    end else if (in_valid && out_ready) begin
      m   <= m_new;
      cnt <= (cnt == CW'(N_SCAN-1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
