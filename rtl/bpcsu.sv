// bpcsu: bandwidth-aware parallel centroid search unit.
//
// Finds, for each incoming activation vector, the index of the nearest of
// CA centroids (Chebyshev distance). The CA dPEs are arranged as
// CA/L_CHAIN pipeline chains of L_CHAIN dPEs each; the input vector is
// broadcast to the head of every chain, each chain produces its local
// minimum, and a small registered argmin tree of log2(CA/L_CHAIN) levels
// picks the global one. With the default CA = 64 and L_CHAIN = 16 this is
// the 16 x 4 dPE array with a 2-level reduction tree of the source
// architecture; the chain length is chosen there so that the search latency
// L_CHAIN + log2(CA/L_CHAIN) hides under the lookup-table loading time.
//
// Centroid c lives in chain c / L_CHAIN at position c % L_CHAIN. Ties go to
// the lower centroid index.
//
// Interface: cb_we/cb_addr/cb_data write one centroid per cycle (the
// centroid reader side). in_valid/in_vec take one vector per cycle, no
// back-pressure; out_valid/out_idx/out_dist return results in order.
// Timing: latency L_CHAIN + log2(CA/L_CHAIN) cycles (18 at defaults),
// throughput one vector per cycle.
module bpcsu
  import fp32_pkg::*;
#(
  parameter int unsigned V       = 2,
  parameter int unsigned CA      = 64,
  parameter int unsigned L_CHAIN = 16,
  localparam int unsigned IDX_W  = $clog2(CA),
  localparam int unsigned N_CH   = CA / L_CHAIN,
  localparam int unsigned LEVELS = $clog2(N_CH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cb_we,
  input  logic [IDX_W-1:0] cb_addr,
  input  fp32_t [V-1:0]    cb_data,
  input  logic             in_valid,
  input  fp32_t [V-1:0]    in_vec,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output fp32_t            out_dist
);

  // chain links: [chain][position]; position 0 is the chain input
  logic                 lk_valid [N_CH][L_CHAIN+1];
  fp32_t [V-1:0]        lk_vec   [N_CH][L_CHAIN+1];
  fp32_t                lk_dist  [N_CH][L_CHAIN+1];
  logic [IDX_W-1:0]     lk_idx   [N_CH][L_CHAIN+1];

  for (genvar c = 0; c < N_CH; c++) begin : g_chain
    assign lk_valid[c][0] = in_valid;
    assign lk_vec[c][0]   = in_vec;
    assign lk_dist[c][0]  = FP_INF;
    assign lk_idx[c][0]   = IDX_W'(c * L_CHAIN);
    for (genvar j = 0; j < L_CHAIN; j++) begin : g_pe
      localparam logic [IDX_W-1:0] ID = IDX_W'(c * L_CHAIN + j);
      dpe #(.V(V), .IDX_W(IDX_W), .MY_IDX(ID)) u_dpe (
        .clk      (clk),
        .rst_n    (rst_n),
        .ld_en    (cb_we && cb_addr == ID),
        .ld_data  (cb_data),
        .in_valid (lk_valid[c][j]),
        .in_vec   (lk_vec[c][j]),
        .in_dist  (lk_dist[c][j]),
        .in_idx   (lk_idx[c][j]),
        .out_valid(lk_valid[c][j+1]),
        .out_vec  (lk_vec[c][j+1]),
        .out_dist (lk_dist[c][j+1]),
        .out_idx  (lk_idx[c][j+1])
      );
    end
  end

  // argmin reduction tree: level 0 holds the chain outputs
  fp32_t            t_dist  [LEVELS+1][N_CH];
  logic [IDX_W-1:0] t_idx   [LEVELS+1][N_CH];
  logic             t_valid [LEVELS+1];

  assign t_valid[0] = lk_valid[0][L_CHAIN];
  for (genvar c = 0; c < N_CH; c++) begin : g_leaf
    assign t_dist[0][c] = lk_dist[c][L_CHAIN];
    assign t_idx[0][c]  = lk_idx[c][L_CHAIN];
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int unsigned NN = N_CH >> (l + 1);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) t_valid[l+1] <= 1'b0;
      else        t_valid[l+1] <= t_valid[l];
    end
    for (genvar n = 0; n < N_CH; n++) begin : g_node
      if (n < NN) begin : g_cmp
        always_ff @(posedge clk) begin
          if (fp_lt(t_dist[l][2*n+1], t_dist[l][2*n])) begin
            t_dist[l+1][n] <= t_dist[l][2*n+1];
            t_idx[l+1][n]  <= t_idx[l][2*n+1];
          end else begin
            t_dist[l+1][n] <= t_dist[l][2*n];
            t_idx[l+1][n]  <= t_idx[l][2*n];
          end
        end
      end else begin : g_unused
        assign t_dist[l+1][n] = FP_INF;
        assign t_idx[l+1][n]  = '0;
      end
    end
  end

  assign out_valid = t_valid[LEVELS];
  assign out_idx   = t_idx[LEVELS][0];
  assign out_dist  = t_dist[LEVELS][0];

endmodule
