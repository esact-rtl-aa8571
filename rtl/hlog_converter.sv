// hlog_converter: turns a stream of HLog products into one signed binary sum.
//
// It keeps, for each sign and each exponent 0..15, a counter of how many
// power-of-two terms of that exponent it has seen ("count"). The binary sum is
// then sum_e (pos[e] - neg[e]) * 2^e: each count is shifted into place and
// summed per sign ("convert"), and the negative total is subtracted from the
// positive one ("sub"). The count/convert/sub structure follows the paper,
// which draws it from a one-hot adder; the counter width and the placement of
// one converter behind every array cell (so that an 8x128 output tile
// accumulates over the reduction dimension, one product per cycle) are this
// design's choices.
//
// Interface: clear (synchronous) empties the counters; when in_valid is high
// the NIN products are counted at the clock edge. result is combinational from
// the counters, so it is valid the cycle after the last counted product.
module hlog_converter
  import esact_pkg::*;
#(
  parameter int unsigned NIN   = 1,   // products counted per cycle
  parameter int unsigned CNT_W = 10,  // counter width: >= log2(2 * products per sum)
  parameter int unsigned OUT_W = 32   // result width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  hprod_t [NIN-1:0]        prod,
  output logic signed [OUT_W-1:0] result
);

  logic [CNT_W-1:0] pos_cnt [NEXP];
  logic [CNT_W-1:0] neg_cnt [NEXP];
  logic [CNT_W-1:0] pos_inc [NEXP];
  logic [CNT_W-1:0] neg_inc [NEXP];

  // Number of terms of each exponent and sign among this cycle's inputs.
  always_comb begin
    for (int e = 0; e < NEXP; e++) begin
      pos_inc[e] = '0;
      neg_inc[e] = '0;
    end
    for (int i = 0; i < NIN; i++) begin
      for (int e = 0; e < NEXP; e++) begin
        if (prod[i].e1 == 4'(e)) begin
          if (prod[i].sign) neg_inc[e] = neg_inc[e] + 1'b1;
          else              pos_inc[e] = pos_inc[e] + 1'b1;
        end
        if (prod[i].e2 == 4'(e) && prod[i].e2 != EXP_NONE) begin
          if (prod[i].sign) neg_inc[e] = neg_inc[e] + 1'b1;
          else              pos_inc[e] = pos_inc[e] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NEXP; e++) begin
        pos_cnt[e] <= '0;
        neg_cnt[e] <= '0;
      end
    end else if (clear) begin
      for (int e = 0; e < NEXP; e++) begin
        pos_cnt[e] <= '0;
        neg_cnt[e] <= '0;
      end
    end else if (in_valid) begin
      for (int e = 0; e < NEXP; e++) begin
        pos_cnt[e] <= pos_cnt[e] + pos_inc[e];
        neg_cnt[e] <= neg_cnt[e] + neg_inc[e];
      end
    end
  end

  // Convert the counts to binary and subtract.
  logic signed [OUT_W-1:0] pos_sum, neg_sum;
  always_comb begin
    pos_sum = '0;
    neg_sum = '0;
    for (int e = 0; e < NEXP; e++) begin
      pos_sum = pos_sum + (OUT_W'(pos_cnt[e]) << e);
      neg_sum = neg_sum + (OUT_W'(neg_cnt[e]) << e);
    end
    result = pos_sum - neg_sum;
  end

endmodule
