// map_mul: the Map node f(x, y) = x * y that multiplies the Q stream by the
// K^T stream element by element (first node of the pipeline, Eq. s_ij =
// sum_k q_ik * k_kj before the sum).
//
// It joins two valid/ready streams: an output is offered when both inputs
// are valid, and both inputs are consumed together when it is taken. The
// product is fixed point (sdpa_pkg::fx_mul, truncated). The node is purely
// combinational, zero latency, one product per cycle; the FIFO that follows
// it in the pipeline provides the register stage.
//
// The node's function is the paper's; the join handshake and the
// fixed-point rounding are this design's.
module map_mul
  import sdpa_pkg::*;
(
  input  logic a_valid,
  output logic a_ready,
  input  fx_t  a_data,
  input  logic b_valid,
  output logic b_ready,
  input  fx_t  b_data,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  out_data
);
  assign out_valid = a_valid && b_valid;
  assign a_ready   = out_ready && b_valid;
  assign b_ready   = out_ready && a_valid;
  assign out_data  = fx_mul(a_data, b_data);
endmodule
