// bernoulli_dropout: dynamic channel-wise (CONV) / neuron-wise (FC) dropout.
//
// One beat carries the CH values of one pixel; PIX beats (H x W pixels, 1 for
// a fully-connected layer) make one forward pass. On the first beat of each
// pass the layer draws one random number per channel and keeps channel c for
// the whole pass when the number is at least P_THRESH; kept values are
// multiplied by SCALE (Q8.8), dropped values are zero. For an FC layer the
// channels are the neurons, so the mask is per neuron. The next pass draws a
// new mask, which gives the Monte Carlo samples their diversity.
//
// Interface: valid/ready streams in and out, plus out_keep (1 = kept).
// Timing: one registered stage, one beat per cycle.
//
// From the paper: Bernoulli sampling, point/channel granularity, dynamic
// sampling, FC or CONV placement, Q7.8 data. This design's own: channel (not
// point) masks on CONV maps, the stream format, generators, rate and scale.
module bernoulli_dropout
  import dropout_pkg::*;
#(
  parameter int unsigned CH       = 120,
  parameter int unsigned PIX      = 1,
  parameter logic [15:0] P_THRESH = P_THRESH_DEFAULT,
  parameter logic [15:0] SCALE    = SCALE_DEFAULT,
  parameter logic [31:0] SEED     = 32'h2468_ace1
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

  localparam int unsigned PW = (PIX > 1) ? $clog2(PIX) : 1;

  logic                  accept;
  logic                  first;
  logic [PW-1:0]         beat;
  logic [CH-1:0][15:0]   rnd;
  logic [CH-1:0]         mask_q;
  logic [CH-1:0]         keep;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign first    = (beat == '0);

  rng_lanes #(.LANES(CH), .SEED(SEED)) u_rng (
    .clk, .rst_n, .step(accept && first), .rnd
  );

  always_comb begin
    for (int unsigned c = 0; c < CH; c++)
      keep[c] = first ? (rnd[c] >= P_THRESH) : mask_q[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat      <= '0;
      mask_q    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_keep  <= '0;
    end else if (accept) begin
      beat      <= (32'(beat) == PIX - 1) ? '0 : beat + 1'b1;
      mask_q    <= keep;
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
