// sdpa_memfree: scaled dot-product attention O = softmax(Q K^T) V computed
// as a streaming dataflow pipeline whose intermediate storage does not grow
// with the sequence length N (the memory-free attention of the paper).
//
// The pipeline is a chain of parallel-pattern nodes joined by depth-2 FIFOs:
//
//   Q, K^T -> Map(x*y) -> FIFO -> Reduce(d)(+) -> FIFO -> Scan(N)(-inf)
//          -> FIFO -> fork -+-> Reduce(N)(acc*s+x) -> FIFO -> Repeat -> FIFO -+
//                           |                                                 +-> Map(x/y) -> O
//                      V ---+-> MemReduce(N)       -> FIFO -> serializer -----+
//
// Softmax uses a running maximum m (Scan) and rescales both reductions by
// Delta = e^(m_old - m_new) when the maximum grows, so the row sum r_i and
// the unnormalised output row l_i are complete at the same moment and no
// FIFO of length N is needed. The division by r_i is moved after the product
// with V (o_i = l_i / r_i).
//
// Stream order at the ports, for every query row i = 0..N-1 and every key
// j = 0..N-1:
//   q/k : d tokens, q_ik and k_kj for k = 0..d-1 (q_i is sent once per key)
//   v   : one token v_j, the whole value row (D = d elements)
//   o   : after the N-th key of row i, the d elements o_ik, k = 0..d-1
// All ports are valid/ready; with the inputs always valid and the output
// always ready the pipeline takes one q/k pair per cycle, so one attention
// head takes N*N*d cycles plus a few cycles of latency.
//
// The node graph, the node functions and the FIFO depth follow the paper.
// The fixed-point format (sdpa_pkg), the fork, the serializer in front of
// the divider and the repeat count d (the figure prints N, which only
// matches the d elements of a row when N = d) are this design's choices.
module sdpa_memfree
  import sdpa_pkg::*;
#(
  parameter int unsigned N          = 128,  // sequence length
  parameter int unsigned D          = 64,   // head dimension d
  parameter int unsigned FIFO_DEPTH = 2     // depth of every short FIFO
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        q_valid,
  output logic        q_ready,
  input  fx_t         q_data,
  input  logic        k_valid,
  output logic        k_ready,
  input  fx_t         k_data,
  input  logic        v_valid,
  output logic        v_ready,
  input  fx_t [D-1:0] v_data,
  output logic        o_valid,
  input  logic        o_ready,
  output fx_t         o_data
);
  typedef fx_t [D-1:0] vec_t;

  // Map(x*y) -> FIFO
  logic prod_valid, prod_ready;
  fx_t  prod_data;
  logic prodf_valid, prodf_ready;
  fx_t  prodf_data;

  map_mul u_qk_mul (
    .a_valid(q_valid), .a_ready(q_ready), .a_data(q_data),
    .b_valid(k_valid), .b_ready(k_ready), .b_data(k_data),
    .out_valid(prod_valid), .out_ready(prod_ready), .out_data(prod_data)
  );

  short_fifo #(.T(fx_t), .DEPTH(FIFO_DEPTH)) u_fifo_prod (
    .clk, .rst_n,
    .in_valid(prod_valid), .in_ready(prod_ready), .in_data(prod_data),
    .out_valid(prodf_valid), .out_ready(prodf_ready), .out_data(prodf_data)
  );

  // Reduce(d)(0)(acc+x) -> FIFO
  logic s_valid, s_ready;
  fx_t  s_data;
  logic sf_valid, sf_ready;
  fx_t  sf_data;

  reduce_sum #(.N_RED(D)) u_dot (
    .clk, .rst_n,
    .in_valid(prodf_valid), .in_ready(prodf_ready), .in_data(prodf_data),
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data)
  );

  short_fifo #(.T(fx_t), .DEPTH(FIFO_DEPTH)) u_fifo_s (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(sf_valid), .out_ready(sf_ready), .out_data(sf_data)
  );

  // Scan(N)(-inf) -> FIFO -> fork
  logic       pr_valid, pr_ready;
  scan_pair_t pr_data;
  logic       prf_valid, prf_ready;
  scan_pair_t prf_data;

  scan_max_exp #(.N_SCAN(N)) u_scan (
    .clk, .rst_n,
    .in_valid(sf_valid), .in_ready(sf_ready), .in_data(sf_data),
    .out_valid(pr_valid), .out_ready(pr_ready), .out_data(pr_data)
  );

  short_fifo #(.T(scan_pair_t), .DEPTH(FIFO_DEPTH)) u_fifo_pair (
    .clk, .rst_n,
    .in_valid(pr_valid), .in_ready(pr_ready), .in_data(pr_data),
    .out_valid(prf_valid), .out_ready(prf_ready), .out_data(prf_data)
  );

  logic       pa_valid, pa_ready;   // to the row-sum reduction
  scan_pair_t pa_data;
  logic       pb_valid, pb_ready;   // to the vector reduction
  scan_pair_t pb_data;

  stream_fork #(.T(scan_pair_t)) u_fork (
    .clk, .rst_n,
    .in_valid(prf_valid), .in_ready(prf_ready), .in_data(prf_data),
    .out0_valid(pa_valid), .out0_ready(pa_ready), .out0_data(pa_data),
    .out1_valid(pb_valid), .out1_ready(pb_ready), .out1_data(pb_data)
  );

  // Row sum: Reduce(N)(0)(acc*s+x) -> FIFO -> Repeat -> FIFO
  logic r_valid, r_ready;
  fx_t  r_data;
  logic rf_valid, rf_ready;
  fx_t  rf_data;
  logic rr_valid, rr_ready;
  fx_t  rr_data;
  logic rrf_valid, rrf_ready;
  fx_t  rrf_data;

  reduce_rescale #(.N_RED(N)) u_rowsum (
    .clk, .rst_n,
    .in_valid(pa_valid), .in_ready(pa_ready), .in_data(pa_data),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data)
  );

  short_fifo #(.T(fx_t), .DEPTH(FIFO_DEPTH)) u_fifo_r (
    .clk, .rst_n,
    .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data),
    .out_valid(rf_valid), .out_ready(rf_ready), .out_data(rf_data)
  );

  repeat_n #(.T(fx_t), .N_REP(D)) u_repeat (
    .clk, .rst_n,
    .in_valid(rf_valid), .in_ready(rf_ready), .in_data(rf_data),
    .out_valid(rr_valid), .out_ready(rr_ready), .out_data(rr_data)
  );

  short_fifo #(.T(fx_t), .DEPTH(FIFO_DEPTH)) u_fifo_rr (
    .clk, .rst_n,
    .in_valid(rr_valid), .in_ready(rr_ready), .in_data(rr_data),
    .out_valid(rrf_valid), .out_ready(rrf_ready), .out_data(rrf_data)
  );

  // Output row: MemReduce(N)(0)(s*acc + x*v) -> FIFO -> serializer
  logic l_valid, l_ready;
  vec_t l_data;
  logic lf_valid, lf_ready;
  vec_t lf_data;
  logic le_valid, le_ready;
  fx_t  le_data;

  mem_reduce #(.D(D), .N_RED(N)) u_pv (
    .clk, .rst_n,
    .p_valid(pb_valid), .p_ready(pb_ready), .p_data(pb_data),
    .v_valid, .v_ready, .v_data,
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data)
  );

  short_fifo #(.T(vec_t), .DEPTH(FIFO_DEPTH)) u_fifo_l (
    .clk, .rst_n,
    .in_valid(l_valid), .in_ready(l_ready), .in_data(l_data),
    .out_valid(lf_valid), .out_ready(lf_ready), .out_data(lf_data)
  );

  vec_serializer #(.D(D)) u_ser (
    .clk, .rst_n,
    .in_valid(lf_valid), .in_ready(lf_ready), .in_data(lf_data),
    .out_valid(le_valid), .out_ready(le_ready), .out_data(le_data)
  );

  // Map(x/y)
  map_div u_div (
    .x_valid(le_valid), .x_ready(le_ready), .x_data(le_data),
    .y_valid(rrf_valid), .y_ready(rrf_ready), .y_data(rrf_data),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data)
  );
endmodule
