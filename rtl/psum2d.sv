// psum2d: 2D lookup-table prefix-sum engine (2D-PSum).
//
// Realises the multiply-accumulate of one activation codebook position
// against G output columns by table lookup. For an activation-centroid
// index a and output group t, row a of the 2D lookup table of group t holds
// the pre-computed dot products of activation centroid a with all CW weight
// centroids of that group. The engine
//   1. registers the index (Idx Reg),
//   2. reads that table row into the LUT row registers, while the G weight
//      centroid indices of group t are read into the w_idx register,
//   3. expands the row to G values with G CW:1 value-copy multiplexers
//      (Expanded Output Reg), each driven by one of ROW_COPIES duplicated
//      row registers to limit fan-out,
//   4. adds the expanded values to the partial sums cascaded from the
//      previous engine with a G-lane SIMD adder and passes them on.
// Tables are unsigned INT8 (zero-point quantized); sums are ACC_W bits.
//
// Ordering: for every index taken from the index FIFO the engine steps
// through output groups 0 .. cfg_groups-1, one per cycle, and pops the index
// after the last group. The first engine of a cascade (FIRST = 1) fires
// whenever an index is available and tables are loaded (en); the others fire
// when a cascaded partial sum arrives, so all engines of a chain stay in
// step without a central scheduler.
//
// Memories: the 2D LUT buffer holds NT_MAX tables of CA x CW entries and is
// written WR_ROWS rows per beat (WR_ROWS*CW*8 = 1024 bits, the bandwidth one
// BPCSU/2D-PSum pair is given); the weight-index buffer holds the G indices
// of every group and is written one group per beat.
// Timing: 4 cycles from firing to cas_out_valid, one group per cycle.
// The structure (index register, row registers, duplicated rows, value-copy
// multiplexers, expanded and cascaded registers, SIMD adder) follows the
// source architecture; the firing rule, buffer widths and pipeline depth
// are this design's choices.
module psum2d #(
  parameter int unsigned CA         = 64,
  parameter int unsigned CW         = 16,
  parameter int unsigned G          = 512,
  parameter int unsigned NT_MAX     = 12,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned LUT_W      = 8,
  parameter int unsigned WR_ROWS    = 8,
  parameter int unsigned ROW_COPIES = 4,
  parameter bit          FIRST      = 1'b1,
  localparam int unsigned IA_W  = $clog2(CA),
  localparam int unsigned IW_W  = $clog2(CW),
  localparam int unsigned NT_W  = $clog2(NT_MAX + 1),
  localparam int unsigned T_W   = (NT_MAX > 1) ? $clog2(NT_MAX) : 1,
  localparam int unsigned BLK_N = NT_MAX * CA / WR_ROWS,
  localparam int unsigned BLK_W = $clog2(BLK_N),
  localparam int unsigned ROW_BITS = CW * LUT_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // table loading
  input  logic                          lut_we,
  input  logic [BLK_W-1:0]              lut_waddr,
  input  logic [WR_ROWS*ROW_BITS-1:0]   lut_wdata,
  input  logic                          widx_we,
  input  logic [T_W-1:0]                widx_waddr,
  input  logic [G-1:0][IW_W-1:0]        widx_wdata,
  // configuration
  input  logic [NT_W-1:0]               cfg_groups,
  input  logic                          en,
  // activation index FIFO
  input  logic                          idx_valid,
  input  logic [IA_W-1:0]               idx,
  output logic                          idx_pop,
  // cascade
  input  logic                          cas_in_valid,
  input  logic [T_W-1:0]                cas_in_grp,
  input  logic [G-1:0][ACC_W-1:0]       cas_in,
  output logic                          cas_out_valid,
  output logic [T_W-1:0]                cas_out_grp,
  output logic                          cas_out_last,
  output logic [G-1:0][ACC_W-1:0]       cas_out
);

  localparam int unsigned PER_COPY = G / ROW_COPIES;

  logic [WR_ROWS*ROW_BITS-1:0] lut_mem  [BLK_N];
  logic [G-1:0][IW_W-1:0]      widx_mem [NT_MAX];

  always_ff @(posedge clk) begin
    if (lut_we)  lut_mem[lut_waddr]   <= lut_wdata;
    if (widx_we) widx_mem[widx_waddr] <= widx_wdata;
  end

  // ---------------- firing and group sequencing ----------------
  logic [T_W-1:0] grp;
  logic           fire, last;

  assign fire    = FIRST ? (en && idx_valid) : cas_in_valid;
  assign last    = (NT_W'(grp) == cfg_groups - 1'b1);
  assign idx_pop = fire && last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    grp <= '0;
    else if (fire) grp <= last ? '0 : grp + 1'b1;
  end

  // ---------------- stage 0: index register ----------------
  logic                    v0, last0;
  logic [IA_W-1:0]         idx0;
  logic [T_W-1:0]          t0;
  logic [G-1:0][ACC_W-1:0] cas0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= fire;
  end
  always_ff @(posedge clk) begin
    idx0  <= idx;
    t0    <= grp;
    last0 <= last;
    cas0  <= FIRST ? '0 : cas_in;
  end

  // ---------------- stage 1: LUT row registers, w_idx register ----------------
  logic                       v1, last1;
  logic [T_W-1:0]             t1;
  logic [ROW_BITS-1:0]        row_reg [ROW_COPIES];
  logic [G-1:0][IW_W-1:0]     widx_reg;
  logic [G-1:0][ACC_W-1:0]    cas1;
  logic [BLK_W-1:0]           rd_blk;
  logic [$clog2(WR_ROWS)-1:0] rd_row;
  logic [WR_ROWS*ROW_BITS-1:0] rd_data;

  assign rd_blk  = BLK_W'((32'(t0) * CA + 32'(idx0)) / WR_ROWS);
  assign rd_row  = $clog2(WR_ROWS)'(32'(idx0) % WR_ROWS);
  assign rd_data = lut_mem[rd_blk];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= v0;
  end
  always_ff @(posedge clk) begin
    for (int c = 0; c < ROW_COPIES; c++)
      row_reg[c] <= rd_data[rd_row*ROW_BITS +: ROW_BITS];
    widx_reg <= widx_mem[t0];
    cas1     <= cas0;
    t1       <= t0;
    last1    <= last0;
  end

  // ---------------- stage 2: value-copy multiplexers ----------------
  logic                    v2, last2;
  logic [T_W-1:0]          t2;
  logic [G-1:0][LUT_W-1:0] exp_reg;
  logic [G-1:0][ACC_W-1:0] cas2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    for (int g = 0; g < G; g++)
      exp_reg[g] <= row_reg[g / PER_COPY][widx_reg[g]*LUT_W +: LUT_W];
    cas2  <= cas1;
    t2    <= t1;
    last2 <= last1;
  end

  // ---------------- stage 3: SIMD adder ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cas_out_valid <= 1'b0;
    else        cas_out_valid <= v2;
  end
  always_ff @(posedge clk) begin
    for (int g = 0; g < G; g++)
      cas_out[g] <= cas2[g] + ACC_W'(exp_reg[g]);
    cas_out_grp  <= t2;
    cas_out_last <= last2;
  end

  // A cascaded engine must have its index and tables ready when the partial
  // sum of the previous engine arrives, and both engines must agree on the
  // output group.
  if (!FIRST) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     cas_in_valid |-> (en && idx_valid && cas_in_grp == grp))
      else $error("psum2d: cascade arrived without index/tables or out of step");
  end

endmodule
