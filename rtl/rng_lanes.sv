// rng_lanes: LANES independent 32-bit xorshift generators stepped together.
//
// Each lane starts from dropout_pkg::lane_seed(SEED, lane) at reset and
// advances one step in every cycle that `step` is high. `rnd[l]` is the upper
// half of lane l's current state, a 16-bit uniform number that a dropout
// layer compares with its drop threshold. The output is available in the same
// cycle (combinational from the state register); the new value appears the
// cycle after a step.
//
// The paper only says that the dynamic layers compare random numbers; the
// choice of xorshift and one generator per parallel lane is this design's.
module rng_lanes #(
  parameter int unsigned LANES = 4,
  parameter logic [31:0] SEED  = 32'h1234_5678
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   step,
  output logic [LANES-1:0][15:0] rnd
);
  import dropout_pkg::*;

  logic [LANES-1:0][31:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned l = 0; l < LANES; l++) state[l] <= lane_seed(SEED, l);
    end else if (step) begin
      for (int unsigned l = 0; l < LANES; l++) state[l] <= xorshift32(state[l]);
    end
  end

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) rnd[l] = state[l][31:16];
  end

endmodule
