// activation_unit -- applies the activation function to a row of normalized
// RNS values before they are written back to the unified buffers.
//
// Functions: ACT_NONE passes the value through; ACT_RELU replaces every value
// whose sign bit is set by zero (all digits zero). Finding the sign of an RNS
// number is not a digit-parallel operation, so the sign is taken from the
// normalize pipeline, which already computes the mixed-radix form it needs;
// this is how the paper's remark that simple activation functions are "most
// likely integrated into the RNS normalization step" is realized here. Since
// sign(floor(A/R_F)) = sign(A), applying ReLU after normalization gives the
// same result as applying it before.
//
// One register stage: outputs appear one cycle after the inputs. Sigmoid and
// other non-linear functions are not provided (the paper leaves them to
// further research).
module activation_unit
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
  input  logic [LANES-1:0]        in_neg,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output rns_word_t [LANES-1:0]   out_words,
  output logic                    busy
);
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    out_tag <= in_tag;
    for (int l = 0; l < int'(LANES); l++)
      out_words[l] <= (in_func == ACT_RELU && in_neg[l]) ? '0 : in_words[l];
  end
  assign busy = out_valid;
endmodule
