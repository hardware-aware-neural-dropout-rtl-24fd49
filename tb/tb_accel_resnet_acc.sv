// tb_accel_resnet_acc: end-to-end test of bayes_dropout_accel configured for
// the accuracy-optimal ResNet18 / CIFAR-10 network, Block - Masksembles -
// Bernoulli - Masksembles, with one dropout slot after each of the four
// residual stages (32x32x64, 16x16x128, 8x8x256, 4x4x512). Runs two complete
// inferences. The checks are in tb_accel_body.svh.
module tb_accel_resnet_acc;
  localparam int unsigned NL    = 4;
  localparam int unsigned MAXCH = 512;
  localparam dropout_pkg::drop_type_e TYPES_TB [NL] =
    '{dropout_pkg::DROP_BLOCK, dropout_pkg::DROP_MASKSEMBLES,
      dropout_pkg::DROP_BERNOULLI, dropout_pkg::DROP_MASKSEMBLES};
  localparam int unsigned LH_TB  [NL] = '{32, 16, 8, 4};
  localparam int unsigned LW_TB  [NL] = '{32, 16, 8, 4};
  localparam int unsigned LCH_TB [NL] = '{64, 128, 256, 512};
  localparam logic [31:0] SEED_TB = 32'hc0ff_ee01;
  localparam int unsigned N_INF = 2;
  localparam int unsigned WATCHDOG = 400000;

  logic start, busy, done, feed_valid, feed_ready, result_valid;
  logic [31:0] cycles;
  logic [1:0]  feed_sample;
  logic [NL-1:0] d_in_valid, d_in_ready, d_out_valid, d_out_ready;
  dropout_pkg::fix_t [NL-1:0][MAXCH-1:0] d_in_data, d_out_data;
  logic [NL-1:0][MAXCH-1:0] d_out_keep;

  `include "tb_accel_body.svh"

  initial begin
    wait (test_over);
    $finish;
  end

  bayes_dropout_accel #(
    .NL(NL), .MAXCH(MAXCH), .TYPES(TYPES_TB), .LH(LH_TB), .LW(LW_TB), .LCH(LCH_TB)
  ) dut (.*);
endmodule
