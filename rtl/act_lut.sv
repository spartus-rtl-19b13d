// Activation look-up table: sigmoid (FUNC = 0) or tanh (FUNC = 1) of a Q8.8 input.
//
// The paper implements the HPE's sigmoid and tanh blocks as look-up tables. Here the
// input is clipped to [-8, 8) and quantised to steps of 1/16, which addresses a
// 256-entry ROM of Q8.8 results computed at elaboration time from the exact
// functions (see spartus_pkg). The read is combinational; the HPE registers the
// table input. Table size and input range are this design's choice.
module act_lut
  import spartus_pkg::*;
#(
  parameter int FUNC = 0
) (
  input  act_t x,
  output act_t y
);

  localparam lut_t TAB = (FUNC == 0) ? gen_sigmoid() : gen_tanh();

  assign y = TAB[lut_index(x)];

endmodule
