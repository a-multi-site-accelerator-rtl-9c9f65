// gate: conditional PE. It has a data stream and a condition stream. A
// condition item with non-zero data (a THR decision of 1, a NEO spike) opens
// the gate of its electrode for "hold" data items; a condition item whose
// electrode field is all ones opens every electrode. Data items of an open
// electrode are passed on and count the hold down; data items of a closed
// electrode are consumed and dropped. A zero condition closes the electrode.
// This is how, for example, hashes are only broadcast for windows that were
// classified as a seizure. The condition stream is always accepted; data is
// accepted one item per enabled cycle with one cycle of latency. The hold
// count and the broadcast electrode are this design's choices.
// Lint note: the condition item's tag and last fields are ignored (unused-bit lint warning).
module gate
  import hull_pkg::*;
#(
  parameter int N_CH   = 96,
  parameter int HOLD_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce,
  input  logic [HOLD_W-1:0] hold,
  input  logic              cond_valid,
  output logic              cond_ready,
  input  item_t             cond_item,
  input  logic              in_valid,
  output logic              in_ready,
  input  item_t             in_item,
  output logic              out_valid,
  input  logic              out_ready,
  output item_t             out_item,
  output logic              dropped    // pulse: a data item was dropped
);
  logic [HOLD_W-1:0] cnt [N_CH];
  logic [CHAN_W-1:0] ch;
  logic open_now;

  assign ch = in_item.chan;
  assign cond_ready = 1'b1;
  assign in_ready = ce && (!out_valid || out_ready);
  assign open_now = (int'(ch) < N_CH) && (cnt[ch] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_item  <= '0;
      dropped   <= 1'b0;
      for (int i = 0; i < N_CH; i++) cnt[i] <= '0;
    end else begin
      dropped <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (open_now) begin
          out_valid <= 1'b1;
          out_item  <= in_item;
          cnt[ch]   <= cnt[ch] - 1'b1;
        end else begin
          dropped <= 1'b1;
        end
      end
      // a condition arriving in the same cycle wins over the count-down
      if (cond_valid) begin
        if (cond_item.chan == CHAN_ALL) begin
          for (int i = 0; i < N_CH; i++) cnt[i] <= (cond_item.data != 0) ? hold : '0;
        end else if (int'(cond_item.chan) < N_CH) begin
          cnt[cond_item.chan] <= (cond_item.data != 0) ? hold : '0;
        end
      end
    end
  end
endmodule
