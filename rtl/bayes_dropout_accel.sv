// bayes_dropout_accel: the dropout part of a Monte Carlo dropout accelerator.
//
// The accelerator runs a convolutional network whose dropout positions each
// hold one of four dropout kinds chosen per layer by the search (layer-wise
// heterogeneous dropout). This module holds those NL dropout slots and the
// Monte Carlo sample controller. The convolution, pooling, dense and
// activation layers between the slots are standard streaming layers from a
// library and are not part of this RTL: slot i takes its input stream from
// ports d_in_* [i] (the output of the layer in front of it) and gives its
// output on d_out_* [i] (to the layer after it). The input feeder that
// streams the image into the first layer is driven by feed_* and the last
// layer of the network reports each finished pass on result_valid.
//
// Defaults: the aPE-optimal LeNet configuration Random - Random - Bernoulli,
// with three Monte Carlo samples. Dropout slot 0 follows conv1 (24x24x6),
// slot 1 follows conv2 (8x8x16) and slot 2 follows the first dense layer
// (120 neurons); these LeNet-5 sizes are this design's assumption. Each
// stream beat carries all channels of one pixel in the low LCH[i] lanes of
// a MAXCH-lane bus; unused lanes of d_out_data/d_out_keep are zero.
//
// Timing: every slot accepts one pixel per cycle and adds one cycle of
// latency; `cycles` reports start-to-done latency of the whole inference.
module bayes_dropout_accel
  import dropout_pkg::*;
#(
  parameter int unsigned NL           = 3,
  parameter int unsigned MAXCH        = 120,
  parameter drop_type_e  TYPES [NL]   = '{DROP_RANDOM, DROP_RANDOM, DROP_BERNOULLI},
  parameter int unsigned LH    [NL]   = '{24, 8, 1},
  parameter int unsigned LW    [NL]   = '{24, 8, 1},
  parameter int unsigned LCH   [NL]   = '{6, 16, 120},
  parameter int unsigned NUM_SAMPLES  = 3,
  parameter logic [15:0] P_THRESH     = P_THRESH_DEFAULT,
  parameter logic [15:0] SCALE        = SCALE_DEFAULT,
  parameter int unsigned BLOCK        = 2,
  parameter logic [15:0] GAMMA        = 16'd4096,
  parameter logic [31:0] SEED         = 32'hc0ff_ee01,
  localparam int unsigned SW = (NUM_SAMPLES > 1) ? $clog2(NUM_SAMPLES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // Monte Carlo inference control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   cycles,
  output logic                          feed_valid,
  input  logic                          feed_ready,
  output logic [SW-1:0]                 feed_sample,
  input  logic                          result_valid,
  // dropout slot streams
  input  logic [NL-1:0]                 d_in_valid,
  output logic [NL-1:0]                 d_in_ready,
  input  fix_t [NL-1:0][MAXCH-1:0]      d_in_data,
  output logic [NL-1:0]                 d_out_valid,
  input  logic [NL-1:0]                 d_out_ready,
  output fix_t [NL-1:0][MAXCH-1:0]      d_out_data,
  output logic [NL-1:0][MAXCH-1:0]      d_out_keep
);

  mc_sample_ctrl #(.NUM_SAMPLES(NUM_SAMPLES)) u_ctrl (
    .clk, .rst_n, .start, .busy, .feed_valid, .feed_ready, .feed_sample,
    .result_valid, .done, .cycles
  );

  for (genvar i = 0; i < NL; i++) begin : g_slot
    localparam int unsigned C = LCH[i];
    fix_t [C-1:0] o_data;
    logic [C-1:0] o_keep;

    dropout_layer #(
      .TYPE(TYPES[i]), .H(LH[i]), .W(LW[i]), .CH(C), .NUM_SAMPLES(NUM_SAMPLES),
      .P_THRESH(P_THRESH), .SCALE(SCALE), .BLOCK(BLOCK), .GAMMA(GAMMA),
      .SEED(SEED ^ (32'h0101_0101 * (i + 1)))
    ) u_layer (
      .clk, .rst_n,
      .in_valid (d_in_valid[i]),
      .in_ready (d_in_ready[i]),
      .in_data  (d_in_data[i][C-1:0]),
      .out_valid(d_out_valid[i]),
      .out_ready(d_out_ready[i]),
      .out_data (o_data),
      .out_keep (o_keep)
    );

    always_comb begin
      d_out_data[i] = '0;
      d_out_keep[i] = '0;
      d_out_data[i][C-1:0] = o_data;
      d_out_keep[i][C-1:0] = o_keep;
    end
  end

endmodule
