// mc_sample_ctrl: runs the Monte Carlo forward passes of one inference.
//
// A dropout-based Bayesian network predicts by running the same input
// through the network NUM_SAMPLES times, each time with a different dropout
// mask. On `start` (ignored while busy) this controller issues NUM_SAMPLES
// pass requests on the feed handshake (feed_valid/feed_ready, with the sample
// index in feed_sample) to whatever streams the input image into the first
// layer, and counts `result_valid` pulses, one per pass that has left the
// network. After the last result it pulses `done` and reports in `cycles` the
// number of clock cycles from the edge that took `start` to the edge that
// took the last result (the inference latency).
// Requests are issued as soon as the feeder accepts them, so passes overlap
// in the layer pipeline.
//
// From the paper: repeated forward passes with dropout enabled, sampling
// number three. This design's own: the handshake and the latency counter.
module mc_sample_ctrl #(
  parameter int unsigned NUM_SAMPLES = 3,
  localparam int unsigned SW = (NUM_SAMPLES > 1) ? $clog2(NUM_SAMPLES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          feed_valid,
  input  logic          feed_ready,
  output logic [SW-1:0] feed_sample,
  input  logic          result_valid,
  output logic          done,
  output logic [31:0]   cycles
);

  localparam int unsigned CW = $clog2(NUM_SAMPLES + 1);

  logic [CW-1:0] issued, finished;
  logic [31:0]   count;

  assign feed_valid  = busy && (32'(issued) < NUM_SAMPLES);
  assign feed_sample = SW'(issued);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      issued   <= '0;
      finished <= '0;
      count    <= '0;
      cycles   <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          issued   <= '0;
          finished <= '0;
          count    <= 32'd1;
        end
      end else begin
        count <= count + 1;
        if (feed_valid && feed_ready) issued <= issued + 1'b1;
        if (result_valid) begin
          if (32'(finished) == NUM_SAMPLES - 1) begin
            busy   <= 1'b0;
            done   <= 1'b1;
            cycles <= count;
          end
          finished <= finished + 1'b1;
        end
      end
    end
  end

  a_no_early_result: assert property (@(posedge clk) disable iff (!rst_n)
    busy && result_valid |-> finished < issued || (feed_valid && feed_ready));

endmodule
