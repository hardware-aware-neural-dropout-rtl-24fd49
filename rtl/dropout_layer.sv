// dropout_layer: one dropout slot of the network, of a type fixed at build.
//
// The search picks, for every dropout position of the network, one of four
// dropout kinds; the accelerator generated for that choice holds exactly
// that layer. TYPE selects which of random_dropout, block_dropout,
// bernoulli_dropout or masksembles is built here, for a feature map of
// H x W pixels and CH channels streamed one pixel per beat. All four share
// the same valid/ready stream ports; out_keep gives the per-element mask
// (for block_dropout the pixel's drop bit replicated over the channels).
// Timing is that of the chosen layer: one registered stage, one beat/cycle.
module dropout_layer
  import dropout_pkg::*;
#(
  parameter drop_type_e  TYPE        = DROP_RANDOM,
  parameter int unsigned H           = 24,
  parameter int unsigned W           = 24,
  parameter int unsigned CH          = 6,
  parameter int unsigned NUM_SAMPLES = 3,
  parameter logic [15:0] P_THRESH    = P_THRESH_DEFAULT,
  parameter logic [15:0] SCALE       = SCALE_DEFAULT,
  parameter int unsigned BLOCK       = 2,
  parameter logic [15:0] GAMMA       = 16'd4096,
  parameter logic [31:0] SEED        = 32'h1357_9bdf
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  fix_t   [CH-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output fix_t   [CH-1:0]  out_data,
  output logic   [CH-1:0]  out_keep
);

  if (TYPE == DROP_RANDOM) begin : g_random
    random_dropout #(.CH(CH), .P_THRESH(P_THRESH), .SCALE(SCALE), .SEED(SEED)) u_drop (
      .clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid, .out_ready, .out_data, .out_keep
    );
  end else if (TYPE == DROP_BLOCK) begin : g_block
    logic drop;
    block_dropout #(.H(H), .W(W), .CH(CH), .BLOCK(BLOCK), .GAMMA(GAMMA),
                    .SCALE(SCALE), .SEED(SEED)) u_drop (
      .clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid, .out_ready, .out_data, .out_drop(drop)
    );
    assign out_keep = {CH{!drop}};
  end else if (TYPE == DROP_BERNOULLI) begin : g_bernoulli
    bernoulli_dropout #(.CH(CH), .PIX(H * W), .P_THRESH(P_THRESH), .SCALE(SCALE),
                        .SEED(SEED)) u_drop (
      .clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid, .out_ready, .out_data, .out_keep
    );
  end else begin : g_masksembles
    localparam int unsigned SW = (NUM_SAMPLES > 1) ? $clog2(NUM_SAMPLES) : 1;
    logic [SW-1:0] sample;
    masksembles #(.CH(CH), .PIX(H * W), .NUM_MASKS(NUM_SAMPLES), .MASK_P(P_THRESH),
                  .MASK_SEED(SEED)) u_drop (
      .clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid, .out_ready, .out_data, .out_keep, .out_sample(sample)
    );
  end

endmodule
