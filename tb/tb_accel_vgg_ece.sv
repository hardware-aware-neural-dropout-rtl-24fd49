// tb_accel_vgg_ece: end-to-end test of bayes_dropout_accel configured for
// the ECE-optimal VGG11 / SVHN network, Random - Block - Random -
// Masksembles, with dropout slots after conv2 (16x16x128), conv4 (8x8x256),
// conv6 (4x4x512) and conv8 (2x2x512). Runs two complete inferences. The
// checks are in tb_accel_body.svh.
module tb_accel_vgg_ece;
  localparam int unsigned NL    = 4;
  localparam int unsigned MAXCH = 512;
  localparam dropout_pkg::drop_type_e TYPES_TB [NL] =
    '{dropout_pkg::DROP_RANDOM, dropout_pkg::DROP_BLOCK,
      dropout_pkg::DROP_RANDOM, dropout_pkg::DROP_MASKSEMBLES};
  localparam int unsigned LH_TB  [NL] = '{16, 8, 4, 2};
  localparam int unsigned LW_TB  [NL] = '{16, 8, 4, 2};
  localparam int unsigned LCH_TB [NL] = '{128, 256, 512, 512};
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
