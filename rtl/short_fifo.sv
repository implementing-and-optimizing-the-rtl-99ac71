// short_fifo: the short FIFO placed on the edges between nodes of the
// attention pipeline.
//
// A circular buffer of DEPTH entries (2 by default, the depth the paper uses
// for its short FIFOs) with a valid/ready handshake on both sides. A word is
// written when in_valid && in_ready and read when out_valid && out_ready;
// both may happen in the same cycle, so a full-rate stream passes with no
// bubble. in_ready and out_valid come from registers only, which cuts every
// combinational valid/ready path through the FIFO. Latency is one cycle from
// write to the word appearing on out_data. Reset (rst_n low, synchronous)
// empties the buffer; the storage itself is not cleared.
module short_fifo #(
  parameter type         T     = sdpa_pkg::fx_t,
  parameter int unsigned DEPTH = 2
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
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T               mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic [AW:0]    count;
  logic           push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= in_data;
        wr_ptr      <= next_ptr(wr_ptr);
      end
      if (pop) rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A producer that offers a word keeps it until it is taken.
  a_in_hold : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));
  a_count : assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));
endmodule
