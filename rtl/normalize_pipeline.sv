// normalize_pipeline -- the point where the residue digits of each value come
// together: LANES copies of rns_normalize_lane working side by side, so a
// whole accumulator row (one value per lane, each value made of all N_DIGITS
// digits from the N_DIGITS digit slices) is normalized per cycle.
//
// A tag (destination unified-buffer row) and the activation function travel
// with each row and leave with it. Latency NORM_LAT = N_DIGITS+2 cycles,
// throughput one row per cycle; busy is high while any row is in flight.
// Outputs: the normalized words, floor(A/R_F), and one sign bit per lane for
// the activation stage that follows.
//
// The paper shows a single normalize pipeline shared by all digit slices and
// calls normalization pipelined; LANES equal to the array width, so
// normalization keeps pace with the matrix unit, is this design's choice.
module normalize_pipeline
  import rns_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned TAG_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  act_func_e               in_func,
  input  rns_word_t [LANES-1:0]   in_words,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output act_func_e               out_func,
  output rns_word_t [LANES-1:0]   out_words,
  output logic [LANES-1:0]        out_neg,
  output logic                    busy
);
  logic [LANES-1:0] lane_valid;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    rns_normalize_lane u_lane (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_word  (in_words[l]),
      .out_valid(lane_valid[l]),
      .out_word (out_words[l]),
      .out_neg  (out_neg[l])
    );
  end

  // Side band delayed by the same NORM_LAT cycles as the lanes.
  logic [NORM_LAT-1:0] vpipe;
  logic [TAG_W-1:0]    tpipe [NORM_LAT];
  act_func_e           fpipe [NORM_LAT];
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[NORM_LAT-2:0], in_valid};
    tpipe[0] <= in_tag;
    fpipe[0] <= in_func;
    for (int k = 1; k < int'(NORM_LAT); k++) begin
      tpipe[k] <= tpipe[k-1];
      fpipe[k] <= fpipe[k-1];
    end
  end
  assign out_valid = vpipe[NORM_LAT-1];
  assign out_tag   = tpipe[NORM_LAT-1];
  assign out_func  = fpipe[NORM_LAT-1];
  assign busy      = in_valid || (|vpipe);

  a_lanes_agree: assert property (@(posedge clk) disable iff (!rst_n) lane_valid == {LANES{out_valid}})
    else $error("normalize_pipeline: lane valid out of step with side band");
endmodule
