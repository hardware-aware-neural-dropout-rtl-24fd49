// random_dropout: dynamic point-wise dropout for convolutional feature maps.
//
// The layer sits on an activation stream in which one beat carries the CH
// channel values of one pixel. For every element of every beat it draws a
// fresh 16-bit random number (one generator lane per channel) and drops the
// element when the number is below P_THRESH; a kept element is multiplied by
// SCALE (Q8.8). Because the draw is repeated for every element of every pass,
// each Monte Carlo forward pass sees a different mask.
//
// Interface: valid/ready streams in and out, one pixel per beat, plus
// out_keep, the mask bit of each output element (1 = kept).
// Timing: one registered stage; one beat per cycle, first output one cycle
// after the input beat is accepted.
//
// From the paper: point granularity, dynamic sampling, placement after CONV
// layers, the comparison with random numbers, Q7.8 data. This design's own:
// the stream format, the xorshift generators, the rate and the rescaling.
module random_dropout
  import dropout_pkg::*;
#(
  parameter int unsigned CH       = 6,
  parameter logic [15:0] P_THRESH = P_THRESH_DEFAULT,
  parameter logic [15:0] SCALE    = SCALE_DEFAULT,
  parameter logic [31:0] SEED     = 32'h1357_9bdf
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  fix_t   [CH-1:0]     in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output fix_t   [CH-1:0]     out_data,
  output logic   [CH-1:0]     out_keep
);

  logic                  accept;
  logic [CH-1:0][15:0]   rnd;
  logic [CH-1:0]         keep;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;

  rng_lanes #(.LANES(CH), .SEED(SEED)) u_rng (
    .clk, .rst_n, .step(accept), .rnd
  );

  always_comb begin
    for (int unsigned c = 0; c < CH; c++) keep[c] = (rnd[c] >= P_THRESH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_keep  <= '0;
    end else if (accept) begin
      out_valid <= 1'b1;
      out_keep  <= keep;
      for (int unsigned c = 0; c < CH; c++)
        out_data[c] <= keep[c] ? scale_keep(in_data[c], SCALE) : fix_t'(0);
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
