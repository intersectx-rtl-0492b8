// ix_svpu: Stream Value Processing Unit with its accumulator acc_reg.
// Combines the two values of a matched key pair with the operation that the
// S_VINTER immediate selects and adds the result to acc_reg:
//   MAC: acc += val0 * val1     MAX: acc += max(val0, val1)
//   MIN: acc += min(val0, val1)
// One pair per cycle; values are unsigned and the sum wraps at 32 bits (this
// design's choice).  clr zeroes acc_reg at the start of an instruction.
module ix_svpu
  import ix_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  vop_e op,
  input  logic in_valid,
  input  val_t val0,
  input  val_t val1,
  output val_t acc
);
  val_t term;
  always_comb begin
    unique case (op)
      VOP_MAX: term = (val0 > val1) ? val0 : val1;
      VOP_MIN: term = (val0 < val1) ? val0 : val1;
      default: term = val_t'(val0 * val1);
    endcase
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (clr)      acc <= '0;
    else if (in_valid) acc <= acc + term;
  end
endmodule
