// center_correct: weight center buffer plus the multiply/add that restores
// the center term of Center+Offset encoded dot products.
//
// Every weight filter f of crossbar x has an 8b center phi (1..255) stored in
// the center buffer (NUM_XBAR x ENTRIES entries). The crossbar delivers the
// offset dot product (W+ - W-).I; this unit outputs
//     psum = (W+ - W-).I + phi * sum(I)
// with sum(I) from the crossbar's running input sum. Arithmetic wraps
// modulo 2^PSUM_W like the psum buffer.
//
// Timing: present (in_valid, in_xbar, in_filter, in_psum, in_sum); the
// corrected psum appears one clock later with out_valid. Center writes use
// a separate port. The equation is the paper's; widths, wrap-around and the
// single shared multiplier per IMA are this design's choices.
module center_correct
  import raella_pkg::*;
#(
  parameter int unsigned NUM_XBAR = 4,
  parameter int unsigned ENTRIES  = 256,
  parameter int unsigned PSUM_W   = 16,
  parameter int unsigned SUM_W    = 17
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          c_we,
  input  logic [$clog2(NUM_XBAR)-1:0]   c_xbar,
  input  logic [$clog2(ENTRIES)-1:0]    c_addr,
  input  logic [W_W-1:0]                c_val,
  input  logic                          in_valid,
  input  logic [$clog2(NUM_XBAR)-1:0]   in_xbar,
  input  logic [$clog2(ENTRIES)-1:0]    in_filter,
  input  logic signed [PSUM_W-1:0]      in_psum,
  input  logic [SUM_W-1:0]              in_sum,
  output logic                          out_valid,
  output logic signed [PSUM_W-1:0]      out_psum
);
  logic [W_W-1:0] centers [NUM_XBAR][ENTRIES];

  always_ff @(posedge clk)
    if (c_we) centers[c_xbar][c_addr] <= c_val;

  logic [W_W+SUM_W-1:0] prod;
  assign prod = (W_W+SUM_W)'(centers[in_xbar][in_filter]) * (W_W+SUM_W)'(in_sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_psum  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_psum <= in_psum + PSUM_W'(prod);
    end
  end
endmodule
