// map_div: the last Map node of the pipeline, f(x, y) = x / y, which turns
// the accumulated output row l_i into o_i = l_i / r_i.
//
// x carries the elements of l_i one per token, y the row sum r_i repeated
// once per element. The node joins the two streams (an output needs both
// valid; both are consumed when it is taken) and divides in fixed point
// (sdpa_pkg::fx_div, truncating, saturated; division by zero saturates).
// Combinational, zero latency, one quotient per cycle.
//
// The node's function is the paper's; the join handshake, rounding and
// saturation are this design's.
module map_div
  import sdpa_pkg::*;
(
  input  logic x_valid,
  output logic x_ready,
  input  fx_t  x_data,
  input  logic y_valid,
  output logic y_ready,
  input  fx_t  y_data,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  out_data
);
  assign out_valid = x_valid && y_valid;
  assign x_ready   = out_ready && y_valid;
  assign y_ready   = out_ready && x_valid;
  assign out_data  = fx_div(x_data, y_data);
endmodule
