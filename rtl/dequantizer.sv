// dequantizer: converts accumulated lookup-table sums back to FP32.
//
// The lookup tables are stored as unsigned INT8 with a per-tensor zero
// point, so an accumulated sum is an affine image of the real dot product.
// Each lane computes y = float(acc) * scale + shift, where scale and shift
// are the per-tensor factors supplied with the projection (shift folds in
// the zero point times the number of accumulated terms). LANES values are
// converted per beat.
//
// Interface: valid/ready on both sides; a TAG_W-bit side band (destination,
// token, column) travels with the data unchanged.
// Timing: one register stage, one beat per cycle, stalls with out_ready.
// The per-tensor scale/shift conversion follows the source architecture;
// the lane count and the FP32 rounding (truncation) are this design's
// choices.
module dequantizer
  import fp32_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned TAG_W = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  fp32_t                       scale,
  input  fp32_t                       shift,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LANES-1:0][ACC_W-1:0] in_data,
  input  logic [TAG_W-1:0]            in_tag,
  output logic                        out_valid,
  input  logic                        out_ready,
  output fp32_t [LANES-1:0]           out_data,
  output logic [TAG_W-1:0]            out_tag
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      for (int i = 0; i < LANES; i++)
        out_data[i] <= fp_add(fp_mul(fp_from_int(32'(signed'(in_data[i]))), scale), shift);
      out_tag <= in_tag;
    end
  end

endmodule
