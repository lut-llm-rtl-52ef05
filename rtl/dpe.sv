// dpe: distance processing element of the bandwidth-aware parallel centroid
// search unit (BPCSU).
//
// A dPE holds one activation centroid of V FP32 elements. For the input
// vector x passing through it, it computes the Chebyshev distance
// max_i |x_i - c_i| and compares it with the best (distance, index) pair
// received from the previous dPE of its chain; the smaller one is forwarded,
// so the last dPE of a chain holds the chain's nearest centroid. The input
// vector travels along the chain with the running minimum. Ties keep the
// earlier (lower-index) centroid.
//
// Interface: ld_en/ld_data load the centroid (one cycle). in_* is the
// upstream chain link, out_* the registered downstream link.
// Timing: one cycle from in_valid to out_valid, one new vector per cycle.
// The distance metric and the chained arrangement follow the source
// architecture; truncating FP32 arithmetic and the tie rule are this
// design's choices.
module dpe
  import fp32_pkg::*;
#(
  parameter int unsigned V     = 2,
  parameter int unsigned IDX_W = 6,
  parameter logic [IDX_W-1:0] MY_IDX = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ld_en,
  input  fp32_t [V-1:0]        ld_data,
  input  logic                 in_valid,
  input  fp32_t [V-1:0]        in_vec,
  input  fp32_t                in_dist,
  input  logic [IDX_W-1:0]     in_idx,
  output logic                 out_valid,
  output fp32_t [V-1:0]        out_vec,
  output fp32_t                out_dist,
  output logic [IDX_W-1:0]     out_idx
);

  fp32_t [V-1:0] centroid;
  fp32_t         cur_dist;

  always_comb begin
    cur_dist = FP_ZERO;
    for (int i = 0; i < V; i++)
      cur_dist = fp_max(cur_dist, fp_abs(fp_sub(in_vec[i], centroid[i])));
  end

  always_ff @(posedge clk) begin
    if (ld_en) centroid <= ld_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
      out_dist  <= FP_INF;
      out_idx   <= '0;
    end else begin
      out_valid <= in_valid;
      out_vec   <= in_vec;
      if (fp_lt(cur_dist, in_dist)) begin
        out_dist <= cur_dist;
        out_idx  <= MY_IDX;
      end else begin
        out_dist <= in_dist;
        out_idx  <= in_idx;
      end
    end
  end

endmodule
