// dwt: one level of the Haar discrete wavelet transform per electrode, used
// for spike detection. Samples of each electrode are taken in pairs (x0, x1);
// on the second sample of a pair one item is sent with
//   data[31:16] = approximation (x0 + x1) >>> 1
//   data[15:0]  = detail        (x0 - x1) >>> 1
// The paper only names the DWT PE; the Haar wavelet and a single level are
// this design's choice. Per-electrode state (first sample of the pair and a
// phase bit) lets electrodes be interleaved. One sample per enabled cycle,
// result one cycle after the pair completes.
// Lint note: the low bit of the sum and difference is dropped by the halving (unused-bit lint warning).
module dwt
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
  logic signed [SAMPLE_W-1:0] first [N_CH];
  logic [N_CH-1:0] phase;
  logic signed [SAMPLE_W:0] s, d;
  logic signed [SAMPLE_W-1:0] x;
  logic [CHAN_W-1:0] ch;

  assign ch = in_item.chan;
  assign x  = signed'(in_item.data[SAMPLE_W-1:0]);
  assign in_ready = ce && (!out_valid || out_ready);
  assign s = first[ch] + x;
  assign d = first[ch] - x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_item  <= '0;
      phase     <= '0;
      for (int i = 0; i < N_CH; i++) first[i] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        phase[ch] <= ~phase[ch];
        if (!phase[ch]) first[ch] <= x;
        else begin
          out_valid     <= 1'b1;
          out_item.chan <= ch;
          out_item.tag  <= in_item.tag;
          out_item.last <= in_item.last;
          out_item.data <= {s[SAMPLE_W:1], d[SAMPLE_W:1]};
        end
      end
    end
  end
endmodule
