// bit_level_pred_unit: the bit-level prediction unit of the sparsity
// prediction module. Computes an R x C tile of a low-cost matrix product with
// additions only, and requantizes it to 8 bits for the next prediction step.
//
// Each cycle it takes R data values (embeddings or predicted Q: one per array
// row) and C weight values (weights or predicted K: one per array column) that
// share the same reduction index. Shift detectors quantize all of them to HLog
// codes; shift judgment cell (r, c) forms the product of row code r and column
// code c; the converter behind the cell counts the product's power-of-two terms.
// After the last reduction step, acc[r][c] = sum_k HLog(d_r,k) * HLog(w_c,k).
//   Q/K prediction : rows = 8 tokens of a window, columns = head dimensions,
//                    reduction over the embedding (D steps).
//   attention pred.: rows = 8 predicted Q rows, columns = L predicted K rows,
//                    reduction over the head dimension (Dh steps).
// q8 is acc shifted right arithmetically by 'shift' and saturated to int8 (the
// paper's "additional 8-bit quantization"; the shift-and-saturate rule is this
// design's choice).
// The 8 x 128 array size and the SD / SJA / converter structure follow the
// paper. The paper lists 128 shift detectors; this unit has R + C (136) so that
// rows and columns are quantized in the same cycle, and it maps the array as an
// outer product (rows x columns), which is this design's reading of the
// row/column controllers in the paper's figure.
//
// Timing: assert clear for one cycle, then in_valid with one reduction step per
// cycle; acc/q8 are valid the cycle after the last in_valid and hold until the
// next clear.
module bit_level_pred_unit
  import esact_pkg::*;
#(
  parameter int unsigned R     = 8,    // array rows (window size)
  parameter int unsigned C     = 128,  // array columns
  parameter int unsigned CNT_W = 11,   // enough for 2 x 768 terms per exponent
  parameter int unsigned ACC_W = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic                           in_valid,
  input  logic signed [7:0]              row_data [R],
  input  logic signed [7:0]              col_data [C],
  input  logic [4:0]                     shift,
  output logic signed [ACC_W-1:0]        acc [R][C],
  output logic signed [7:0]              q8  [R][C]
);

  hlog_t row_code [R];
  hlog_t col_code [C];

  for (genvar r = 0; r < R; r++) begin : g_sd_row
    shift_detector u_sd (.data(row_data[r]), .code(row_code[r]));
  end
  for (genvar c = 0; c < C; c++) begin : g_sd_col
    shift_detector u_sd (.data(col_data[c]), .code(col_code[c]));
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      hprod_t p;
      sja_cell u_sja (.d(row_code[r]), .w(col_code[c]), .p(p));
      hlog_converter #(.NIN(1), .CNT_W(CNT_W), .OUT_W(ACC_W)) u_conv (
        .clk, .rst_n, .clear, .in_valid,
        .prod  (p),
        .result(acc[r][c])
      );
      logic signed [ACC_W-1:0] sh;
      always_comb begin
        sh = acc[r][c] >>> shift;
        if (sh > 127)       q8[r][c] = 8'sd127;
        else if (sh < -128) q8[r][c] = -8'sd128;
        else                q8[r][c] = sh[7:0];
      end
    end
  end

endmodule
