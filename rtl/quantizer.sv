// quantizer: per-output-channel 8b requantization with fused activation.
//
// Each output channel owns 32 bits in the quantization table: an FP16 scale
// (bits 31:16) and an FP16 bias (bits 15:0), CHANNELS = 8192 entries = 32kB.
// A 16b psum becomes  out = clamp(floor(psum * scale + bias))  where the
// clamp is [0,255] when `relu` is set (ReLU folded into quantization) and
// [-128,127] otherwise. The arithmetic is exact: both FP16 operands are
// turned into integers with 24 fraction bits, and "truncate" drops the
// fraction (floor). FP16 infinities/NaNs are treated as the largest finite
// exponent.
//
// Timing: two-stage pipeline; (in_valid, in_ch, in_psum, in_relu, in_tag)
// give (out_valid, out_q, out_tag) two clocks later, one result per clock.
// Table size and the FP16 scale+bias format are the paper's; the rounding
// (floor), clamp bounds and the exact fixed-point datapath are this
// design's choices.
module quantizer
  import raella_pkg::*;
#(
  parameter int unsigned CHANNELS = 8192,
  parameter int unsigned PSUM_W   = 16,
  parameter int unsigned TAG_W    = 16,
  localparam int unsigned CW      = $clog2(CHANNELS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     q_we,
  input  logic [CW-1:0]            q_addr,
  input  logic [31:0]              q_data,    // {scale fp16, bias fp16}
  input  logic                     in_valid,
  input  logic [CW-1:0]            in_ch,
  input  logic signed [PSUM_W-1:0] in_psum,
  input  logic                     in_relu,
  input  logic [TAG_W-1:0]         in_tag,
  output logic                     out_valid,
  output logic [7:0]               out_q,
  output logic [TAG_W-1:0]         out_tag
);
  localparam int FRAC = 24;

  logic [31:0] table_q [CHANNELS];
  always_ff @(posedge clk)
    if (q_we) table_q[q_addr] <= q_data;

  // FP16 -> value * 2^FRAC as a signed 64b integer (exact for all finite FP16
  // values >= 2^-24).
  function automatic logic signed [63:0] fp16_fix(input logic [15:0] h);
    logic [4:0]  e;
    logic [10:0] m;
    logic signed [63:0] v;
    e = (h[14:10] == 5'd31) ? 5'd30 : h[14:10];
    m = (e == 5'd0) ? {1'b0, h[9:0]} : {1'b1, h[9:0]};
    // value = m * 2^(max(e,1) - 25); times 2^24 -> m << (max(e,1) - 1)
    v = 64'(m) << ((e == 5'd0) ? 0 : int'(e) - 1);
    return h[15] ? -v : v;
  endfunction

  // Stage 1: table read.
  logic                     v1, relu1;
  logic signed [PSUM_W-1:0] p1;
  logic [31:0]              t1;
  logic [TAG_W-1:0]         tag1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; relu1 <= 1'b0; p1 <= '0; t1 <= '0; tag1 <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        relu1 <= in_relu;
        p1    <= in_psum;
        t1    <= table_q[in_ch];
        tag1  <= in_tag;
      end
    end
  end

  // Stage 2: multiply, add, truncate, clamp.
  logic signed [63:0] acc, whole;
  logic [7:0]         q;
  always_comb begin
    acc   = 64'(p1) * fp16_fix(t1[31:16]) + fp16_fix(t1[15:0]);
    whole = acc >>> FRAC;
    if (relu1) q = (whole < 0) ? 8'd0 : (whole > 255) ? 8'd255 : whole[7:0];
    else       q = (whole < -128) ? 8'h80 : (whole > 127) ? 8'h7f : whole[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_q <= '0; out_tag <= '0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        out_q   <= q;
        out_tag <= tag1;
      end
    end
  end
endmodule
