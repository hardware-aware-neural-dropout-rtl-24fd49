// masksembles: static dropout with a fixed set of masks, one per sample.
//
// NUM_MASKS binary masks of CH bits are fixed before run time and held in a
// ROM. One beat carries the CH values of one pixel and PIX beats make one
// forward pass; the layer counts passes modulo NUM_MASKS and multiplies every
// beat of pass s element-wise by mask s (a value is passed on unchanged where
// the mask bit is 1 and replaced by zero where it is 0). No random numbers
// are drawn at run time.
//
// Mask contents: bit c of mask s is 1 when the upper half of
// xorshift32(lane_seed(MASK_SEED, s*CH + c)) is at least MASK_P (see
// dropout_pkg), i.e. each bit is dropped with probability MASK_P / 65536.
// The ROM is computed from this formula at elaboration; a set of masks made
// by another generator can be loaded by overriding MASK_SEED/MASK_P or by
// editing gen_masks.
//
// Interface: valid/ready streams in and out, out_keep (the mask bits used)
// and out_sample (the mask index of the output beat).
// Timing: one registered stage, one beat per cycle.
//
// From the paper: static masks generated offline, element-wise product,
// point/channel granularity, one mask per Monte Carlo sample (three samples),
// ROM storage (the paper notes Masksembles costs more BRAM). This design's
// own: the mask generator, channel-wise masks on CONV maps, no rescaling.
module masksembles
  import dropout_pkg::*;
#(
  parameter int unsigned CH        = 6,
  parameter int unsigned PIX       = 1,
  parameter int unsigned NUM_MASKS = 3,
  parameter logic [15:0] MASK_P    = P_THRESH_DEFAULT,
  parameter logic [31:0] MASK_SEED = 32'h0bad_cafe,
  localparam int unsigned SW       = (NUM_MASKS > 1) ? $clog2(NUM_MASKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  fix_t   [CH-1:0]      in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output fix_t   [CH-1:0]      out_data,
  output logic   [CH-1:0]      out_keep,
  output logic   [SW-1:0]      out_sample
);

  localparam int unsigned PW = (PIX > 1) ? $clog2(PIX) : 1;

  function automatic logic [NUM_MASKS-1:0][CH-1:0] gen_masks();
    logic [NUM_MASKS-1:0][CH-1:0] m;
    logic [31:0] h;
    for (int unsigned s = 0; s < NUM_MASKS; s++)
      for (int unsigned c = 0; c < CH; c++) begin
        h       = xorshift32(lane_seed(MASK_SEED, s * CH + c));
        m[s][c] = (h[31:16] >= MASK_P);
      end
    return m;
  endfunction

  localparam logic [NUM_MASKS-1:0][CH-1:0] MASKS = gen_masks();

  logic          accept;
  logic [PW-1:0] beat;
  logic [SW-1:0] sample;
  logic [CH-1:0] keep;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign keep     = MASKS[sample];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat       <= '0;
      sample     <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_keep   <= '0;
      out_sample <= '0;
    end else if (accept) begin
      if (32'(beat) == PIX - 1) begin
        beat   <= '0;
        sample <= (32'(sample) == NUM_MASKS - 1) ? '0 : sample + 1'b1;
      end else begin
        beat   <= beat + 1'b1;
      end
      out_valid  <= 1'b1;
      out_keep   <= keep;
      out_sample <= sample;
      for (int unsigned c = 0; c < CH; c++)
        out_data[c] <= keep[c] ? in_data[c] : fix_t'(0);
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
