// csel: channel selector. It records which electrodes had a hash collision
// (items from ccheck with data[0] = 1 set bit "chan" of a bitmap) and, when
// the item with "last" arrives, emits the selected electrodes in ascending
// order, one per cycle: chan = data = electrode number, tag 0, last on the
// final one. If no electrode was selected a single item with tag 2 and last
// set reports an empty selection. The bitmap is then cleared. These are the
// electrodes whose signals are worth sending or storing; the paper names the
// block, the output order and the empty marker are this design's.
// Lint note: the input tag is ignored (unused-bit lint warning).
module csel
  import hull_pkg::*;
#(
  parameter int N_CH = 96
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ce,
  input  logic  in_valid,
  output logic  in_ready,
  input  item_t in_item,
  output logic  out_valid,
  input  logic  out_ready,
  output item_t out_item
);
  logic [N_CH-1:0] sel;
  logic            emit, empty;
  logic [CHAN_W-1:0] first;
  logic [N_CH-1:0] rest;

  assign in_ready = ce && !emit;

  always_comb begin
    first = '0;
    for (int i = N_CH - 1; i >= 0; i--) if (sel[i]) first = CHAN_W'(i);
    rest = sel;
    rest[first] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= '0; emit <= 1'b0; empty <= 1'b0;
      out_valid <= 1'b0; out_item <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        logic [N_CH-1:0] s;
        s = sel;
        if (in_item.data[0] && int'(in_item.chan) < N_CH) s[in_item.chan] = 1'b1;
        sel <= s;
        if (in_item.last) begin emit <= 1'b1; empty <= (s == '0); end
      end else if (emit && ce && (!out_valid || out_ready)) begin
        out_valid <= 1'b1;
        out_item  <= '0;
        if (empty) begin
          out_item.tag  <= TAG_C;
          out_item.last <= 1'b1;
          emit <= 1'b0;
        end else begin
          out_item.chan <= first;
          out_item.data <= 32'(first);
          out_item.last <= (rest == '0);
          sel <= rest;
          if (rest == '0) emit <= 1'b0;
        end
      end
    end
  end
endmodule
