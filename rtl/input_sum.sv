// input_sum: running sum of the inputs currently applied to one crossbar.
//
// Center+Offset computes W.I = phi*sum(I) + (W+ - W-).I; this unit keeps
// sum(I) for the crossbar. Inputs are added when they are first used (a new
// value is written into a crossbar row) and subtracted when they are last
// used (the value it replaces), LOAD_W values of each per clock, so inputs
// reused between crossbar cycles cost nothing. `clr` zeroes the sum.
// The add-first / subtract-last rule is the paper's; the port shape is this
// design's choice. Updates take effect on the next clock edge.
module input_sum
  import raella_pkg::*;
#(
  parameter int unsigned LOAD_W = 16,
  parameter int unsigned SUM_W  = 17     // holds 512 * 255
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             upd,
  input  act_t             add_val [LOAD_W],
  input  act_t             sub_val [LOAD_W],
  output logic [SUM_W-1:0] sum
);
  logic signed [SUM_W+1:0] delta;
  always_comb begin
    delta = '0;
    for (int i = 0; i < LOAD_W; i++)
      delta = delta + (SUM_W+2)'(add_val[i]) - (SUM_W+2)'(sub_val[i]);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   sum <= '0;
    else if (clr) sum <= '0;
    else if (upd) sum <= SUM_W'($signed({2'b00, sum}) + delta);
  end
endmodule
