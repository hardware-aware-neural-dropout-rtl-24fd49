// tb_bayes_dropout_accel: end-to-end test of bayes_dropout_accel at its
// default configuration, the LeNet network with Random - Random - Bernoulli
// dropout (slots after conv1 24x24x6, conv2 8x8x16 and the 120-neuron dense
// layer) and three Monte Carlo samples. Runs four complete inferences (twelve
// forward passes). The checks are in tb_accel_body.svh.
module tb_bayes_dropout_accel;
  localparam int unsigned NL    = 3;
  localparam int unsigned MAXCH = 120;
  localparam dropout_pkg::drop_type_e TYPES_TB [NL] =
    '{dropout_pkg::DROP_RANDOM, dropout_pkg::DROP_RANDOM, dropout_pkg::DROP_BERNOULLI};
  localparam int unsigned LH_TB  [NL] = '{24, 8, 1};
  localparam int unsigned LW_TB  [NL] = '{24, 8, 1};
  localparam int unsigned LCH_TB [NL] = '{6, 16, 120};
  localparam logic [31:0] SEED_TB = 32'hc0ff_ee01;
  localparam int unsigned N_INF = 4;
  localparam int unsigned WATCHDOG = 200000;

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

  bayes_dropout_accel dut (.*);
endmodule
