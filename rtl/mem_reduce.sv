// mem_reduce: the MemReduce (N) (0-vector) (f: acc, (s, x), v -> s*acc + x*v)
// node, which forms the unnormalised output row with rescaling:
//   l_ij = l_i(j-1) * Delta_ij + e_ij * v_j,   l_i(-1) = 0-vector.
//
// It joins the (delta, e) pair stream from the Scan node with the stream of
// value rows v_j (D elements per token). The accumulator is a D-entry memory
// of registers; every taken token updates all D entries in parallel (2D
// multipliers), so a token is taken per cycle. After N tokens the updated
// vector l_iN is registered on out_data with out_valid and the accumulator
// restarts at 0. Input is accepted whenever the output register is empty or
// being emptied. Synchronous active-low reset.
//
// The node's function is the paper's; the register-array memory, the
// parallel lanes and the handshake are this design's.
module mem_reduce
  import sdpa_pkg::*;
#(
  parameter int unsigned D     = 64,
  parameter int unsigned N_RED = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            p_valid,
  output logic            p_ready,
  input  scan_pair_t      p_data,
  input  logic            v_valid,
  output logic            v_ready,
  input  fx_t [D-1:0]     v_data,
  output logic            out_valid,
  input  logic            out_ready,
  output fx_t [D-1:0]     out_data
);
  localparam int unsigned CW = (N_RED > 1) ? $clog2(N_RED) : 1;

  fx_t [D-1:0]   acc;
  fx_t [D-1:0]   nxt;
  logic [CW-1:0] cnt;
  logic          room, fire;

  assign room    = !out_valid || out_ready;
  assign p_ready = v_valid && room;
  assign v_ready = p_valid && room;
  assign fire    = p_valid && v_valid && room;

  always_comb begin
    for (int k = 0; k < int'(D); k++)
      nxt[k] = fx_mul(acc[k], p_data.delta) + fx_mul(p_data.e, v_data[k]);
  end

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
