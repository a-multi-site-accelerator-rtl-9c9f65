// thr: thresholding PE. Every item's data is compared, as a signed number,
// with the programmable threshold; the item is passed on with data = 1 when
// it is greater and 0 otherwise (electrode, tag and last unchanged). It turns
// an SVM score or a DTW distance into a decision. With "invert" set the test
// is "less than or equal", used after DTW where a small distance is a match.
// One item per enabled cycle, one cycle of latency. The comparison sense and
// the invert option are this design's choices.
module thr
  import hull_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [31:0] threshold,
  input  logic        invert,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  logic gt;
  assign gt = signed'(in_item.data) > signed'(threshold);
  assign in_ready = ce && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_item  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid     <= 1'b1;
        out_item      <= in_item;
        out_item.data <= {31'd0, gt ^ invert};
      end
    end
  end
endmodule
