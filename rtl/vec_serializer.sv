// vec_serializer: turns a stream of D-element vectors into a stream of their
// elements, element 0 first, one per cycle. It connects the vector output of
// mem_reduce to the scalar divider; the paper draws that edge directly, the
// serializer is this design's choice so that a single divider suffices.
//
// Element idx of the current input vector is offered; in_ready rises with
// the last element, so the input is consumed when element D-1 is taken.
// Combinational data path; synchronous active-low reset of the index.
module vec_serializer
  import sdpa_pkg::*;
#(
  parameter int unsigned D = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fx_t [D-1:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fx_t         out_data
);
  localparam int unsigned CW = (D > 1) ? $clog2(D) : 1;

  logic [CW-1:0] idx;
  logic          last;

  assign last      = (idx == CW'(D-1));
  assign out_valid = in_valid;
  assign out_data  = in_data[idx];
  assign in_ready  = out_ready && last;

  always_ff @(posedge clk) begin
    if (!rst_n) idx <= '0;
    else if (out_valid && out_ready) idx <= last ? '0 : idx + 1'b1;
  end
endmodule
