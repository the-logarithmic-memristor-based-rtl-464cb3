// pcsa_bank: behavioural model of the precharge sense amplifiers, one per
// column of a 2T2R array. This is a behavioural model of an analog part.
//
// A precharge sense amplifier charges both of its branches, then lets them
// discharge through the two memristors of the selected cell; the branch with
// the lower resistance falls first and the cross-coupled pair latches the
// result. Here that race is reduced to a comparison of the two device
// states: BL in LRS with BLb in HRS reads 1, the reverse reads 0. When both
// devices are in the same state (an unprogrammed or damaged cell) the real
// amplifier resolves on its own offset; the model then reads 0.
//
// Timing: the amplifiers precharge while sense_en is low and evaluate on the
// rising clock edge at which sense_en is high; q holds that value until the
// next evaluation. That edge is the only storage on the inference path, so
// the result of a read is usable one cycle after it is issued.
// One amplifier per column follows the paper; the rest is this model's.
module pcsa_bank #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         sense_en,
  input  logic [W-1:0] bl_lrs,
  input  logic [W-1:0] blb_lrs,
  output logic [W-1:0] q
);

  initial q = '0;

  always @(posedge clk) begin
    if (sense_en)
      q <= bl_lrs & ~blb_lrs;
  end

endmodule
