// mac_array: the 68 FP16 multiply-accumulate units of one dot-product unit.
//
// Lane l holds the MAC register and the score register of MAC unit l in
// the paper's dot-product figure. Each accepted beat multiplies the shared
// query element QV[PE][j] by the embedding element EV[i+l][j] of every lane
// and adds the product to that lane's MAC register. The first dimension of
// a vector (first = 1) starts a new sum instead of adding to the old one,
// so no separate clear cycle is needed. After the last dimension the
// dot-product unit raises score_we for one cycle and all 68 sums move into
// the score registers, while the MAC registers already accumulate the next
// block of 68 vectors.
//
// Interface: en/first/qv/ev are sampled on the rising clock edge; score is
// the bank of score registers (2 bytes each, as printed in the figure).
// Timing: one MAC per lane per cycle; the score registers are written one
// cycle after the last beat of a block, as the paper describes.
// Own choices: the product and the sum are each rounded to FP16 (see
// iks_pkg); reset clears both register banks. The lanes are written as one
// loop rather than 68 instances; the hardware is the same.
module mac_array
  import iks_pkg::*;
#(
  parameter int unsigned NLANES = LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,        // a beat is accepted this cycle
  input  logic               first,     // the beat carries dimension 0
  input  fp16_t              qv,        // QV[PE][j], shared by all lanes
  input  fp16_t [NLANES-1:0] ev,        // EV[i+l][j] for lane l
  input  logic               score_we,  // WE of the score registers
  output fp16_t [NLANES-1:0] mac_q,     // MAC REG of every lane
  output fp16_t [NLANES-1:0] score      // Score REG of every lane
);

  fp16_t [NLANES-1:0] acc_next;

  always_comb begin
    for (int l = 0; l < NLANES; l++)
      acc_next[l] = first ? fp16_mul(qv, ev[l])
                          : fp16_add(mac_q[l], fp16_mul(qv, ev[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_q <= '0;
      score <= '0;
    end else begin
      if (en)       mac_q <= acc_next;
      if (score_we) score <= mac_q;
    end
  end

endmodule
