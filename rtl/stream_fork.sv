// stream_fork: broadcasts one valid/ready stream to two consumers, as where
// the output of the Scan node branches to both reductions.
//
// Each output sees the input token until it has taken it; a per-output
// "taken" flag remembers a consumer that accepted early, so the two
// consumers need not accept in the same cycle. The input token is consumed
// in the cycle in which the last of the two takes it. No added latency.
// Synchronous active-low reset.
//
// The paper only draws the branch; this fork is this design's own.
module stream_fork #(
  parameter type T = sdpa_pkg::fx_t
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out0_valid,
  input  logic out0_ready,
  output T     out0_data,
  output logic out1_valid,
  input  logic out1_ready,
  output T     out1_data
);
  logic taken0, taken1;
  logic ok0, ok1;

  assign out0_valid = in_valid && !taken0;
  assign out1_valid = in_valid && !taken1;
  assign out0_data  = in_data;
  assign out1_data  = in_data;
  assign ok0        = taken0 || out0_ready;
  assign ok1        = taken1 || out1_ready;
  assign in_ready   = ok0 && ok1;

  always_ff @(posedge clk) begin
    if (!rst_n || (in_valid && in_ready)) begin
      taken0 <= 1'b0;
      taken1 <= 1'b0;
    end else begin
      if (out0_valid && out0_ready) taken0 <= 1'b1;
      if (out1_valid && out1_ready) taken1 <= 1'b1;
    end
  end
endmodule
