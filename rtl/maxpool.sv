// maxpool: streaming max-pooling unit of the tile.
//
// Takes the values of one pooling window one per clock (in_first marks the
// first value, in_last the last) and outputs their maximum on the clock
// after in_last. Values are unsigned 8b (post-ReLU activations). Window size
// is free: the tile's sequencer decides it. The paper only names the unit;
// the streaming interface and unsigned compare are this design's choices.
module maxpool (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_first,
  input  logic       in_last,
  input  logic [7:0] in_data,
  output logic       out_valid,
  output logic [7:0] out_data
);
  logic [7:0] best;
  logic [7:0] cand;
  assign cand = (in_first || in_data > best) ? in_data : best;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        best <= cand;
        if (in_last) out_data <= cand;
      end
    end
  end
endmodule
