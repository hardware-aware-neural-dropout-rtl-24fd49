// block_dropout: dynamic patch-wise dropout (DropBlock) for feature maps.
//
// One beat carries the CH channel values of one pixel; pixels arrive in
// raster order, W per row, H rows per forward pass. At each pixel (r, c)
// where a BLOCK x BLOCK patch fits (r <= H-BLOCK, c <= W-BLOCK) one random
// number is drawn, and the pixel becomes a patch seed when the number is
// below GAMMA. A seed at (r, c) zeroes all channels of the pixels
// (r..r+BLOCK-1, c..c+BLOCK-1); kept pixels are multiplied by SCALE (Q8.8).
//
// How the patch is formed in one streaming pass without storing the map:
//  * horizontally, a small shift register remembers the seeds of the last
//    BLOCK-1 pixels of the current row: h(r,c) = any seed in (r, c-BLOCK+1..c);
//  * vertically, a per-column counter vcnt[c] holds how many of the next rows
//    are still covered by a patch started above; it is loaded with BLOCK-1
//    when h(r,c) is set and otherwise counts down. It is ignored in row 0, so
//    no clearing is needed between passes.
//  A pixel is dropped when h(r,c) is set or vcnt[c] is non-zero.
//
// Interface: valid/ready streams in and out, out_drop (1 = pixel dropped).
// Timing: one registered stage, one beat per cycle.
//
// From the paper: patch granularity, dynamic sampling, CONV placement, Q7.8.
// This design's own: the mask is shared by all channels of a pixel, a fixed
// SCALE instead of a normalisation by the count of kept units, the default
// BLOCK = 2 (patches are drawn 2 x 2 in the paper's illustration) and GAMMA.
module block_dropout
  import dropout_pkg::*;
#(
  parameter int unsigned H      = 8,
  parameter int unsigned W      = 8,
  parameter int unsigned CH     = 16,
  parameter int unsigned BLOCK  = 2,
  parameter logic [15:0] GAMMA  = 16'd4096,
  parameter logic [15:0] SCALE  = SCALE_DEFAULT,
  parameter logic [31:0] SEED   = 32'h5a5a_1234
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  fix_t   [CH-1:0]     in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output fix_t   [CH-1:0]     out_data,
  output logic                out_drop
);

  localparam int unsigned RW = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned CW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned VW = $clog2(BLOCK + 1);

  logic              accept;
  logic [RW-1:0]     row;
  logic [CW-1:0]     col;
  logic [0:0][15:0]  rnd;
  logic [BLOCK-1:0]  hist;       // seeds of the previous pixels in this row
  logic [VW-1:0]     vcnt [W];   // rows still covered, per column
  logic [VW-1:0]     vprev;
  logic              seed, hcov, drop;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;

  rng_lanes #(.LANES(1), .SEED(SEED)) u_rng (
    .clk, .rst_n, .step(accept), .rnd
  );

  always_comb begin
    seed = (rnd[0] < GAMMA) && (32'(row) + BLOCK <= H) && (32'(col) + BLOCK <= W);
    hcov = seed;
    for (int unsigned i = 0; i + 1 < BLOCK; i++)
      if (32'(col) > i) hcov = hcov | hist[i];
    vprev = (row == '0) ? '0 : vcnt[col];
    drop  = hcov || (vprev != '0);
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      if (hcov)              vcnt[col] <= VW'(BLOCK - 1);
      else if (vprev != '0)  vcnt[col] <= vprev - 1'b1;
      else                   vcnt[col] <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      hist      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_drop  <= 1'b0;
    end else if (accept) begin
      hist <= {hist[BLOCK-2:0], seed};
      if (32'(col) == W - 1) begin
        col <= '0;
        row <= (32'(row) == H - 1) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
      out_valid <= 1'b1;
      out_drop  <= drop;
      for (int unsigned c = 0; c < CH; c++)
        out_data[c] <= drop ? fix_t'(0) : scale_keep(in_data[c], SCALE);
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
