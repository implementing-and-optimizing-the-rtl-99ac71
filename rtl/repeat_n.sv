// repeat_n: the Repeat (n) node, which offers every token of its input
// stream n times before taking the next one. In the pipeline it repeats the
// row sum r_i once for every element of the output row it divides.
//
// Combinational pass-through of valid and data; a counter of the copies
// already given holds the input (in_ready low) until the n-th copy is taken.
// One copy per cycle. Synchronous active-low reset of the counter.
//
// The node is the paper's Repeat; the handshake is this design's.
module repeat_n #(
  parameter type         T     = sdpa_pkg::fx_t,
  parameter int unsigned N_REP = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned CW = (N_REP > 1) ? $clog2(N_REP) : 1;

  logic [CW-1:0] cnt;
  logic          last;

  assign last      = (cnt == CW'(N_REP-1));
  assign out_valid = in_valid;
  assign out_data  = in_data;
  assign in_ready  = out_ready && last;

  always_ff @(posedge clk) begin
    if (!rst_n) cnt <= '0;
    else if (out_valid && out_ready) cnt <= last ? '0 : cnt + 1'b1;
  end
endmodule
