// dtw: dynamic time warping distance between two sequences, as used to
// compare a spike waveform with a template. Sequence A arrives as items with
// tag 0 and sequence B with tag 1 (data = signed 16-bit sample), each ending
// with "last"; once both are in, the distance is computed over the band
// |i - j| < band (Sakoe-Chiba) with cost |a_i - b_j| (sq = 0) or
// (a_i - b_j)^2 (sq = 1), one matrix cval per enabled cycle and two rows of
// storage, and sent out as one item (data = distance saturated to 32 bits,
// chan = chan of the last B sample, last = 1). Cells outside the band are
// infinite. LMAX bounds the sequence length. The paper lists DTW as a
// processing element; the band, the cost options and the two-row datapath are
// this design's.
module dtw
  import hull_pkg::*;
#(
  parameter int LMAX = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [6:0]  band,
  input  logic        sq,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  localparam int LW = bits_for(LMAX + 1);   // counts 0..LMAX
  localparam int IW = bits_for(LMAX);       // indexes 0..LMAX-1
  localparam logic [33:0] INF = '1;
  logic signed [15:0] a [LMAX];
  logic signed [15:0] b [LMAX];
  logic [LW-1:0] na, nb, i, j;
  logic          a_done, b_done;
  logic [33:0]   prev [LMAX];
  logic [33:0]   cur  [LMAX];
  logic [CHAN_W-1:0] ch;
  typedef enum logic [1:0] {LOAD, CALC, EMIT} state_e;
  state_e state;

  logic signed [16:0] diff;
  logic [33:0] cost, best, cval;
  logic        in_band;

  assign in_ready = ce && (state == LOAD);
  assign diff = 17'(a[IW'(i)]) - 17'(b[IW'(j)]);
  assign in_band = (int'(i) - int'(j) < int'(band)) && (int'(j) - int'(i) < int'(band));

  always_comb begin
    logic [16:0] ad;
    ad   = diff[16] ? 17'(-diff) : 17'(diff);
    cost = sq ? 34'(ad) * 34'(ad) : 34'(ad);
    if (i == '0 && j == '0) best = '0;
    else begin
      best = INF;
      if (i != '0 && prev[IW'(j)] < best) best = prev[IW'(j)];
      if (j != '0 && cur[IW'(j-1)] < best) best = cur[IW'(j-1)];
      if (i != '0 && j != '0 && prev[IW'(j-1)] < best) best = prev[IW'(j-1)];
    end
    if (!in_band || best == INF) cval = INF;
    else if (best + cost >= INF) cval = INF - 1;
    else cval = best + cost;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= LOAD;
      na <= '0; nb <= '0; i <= '0; j <= '0; a_done <= 1'b0; b_done <= 1'b0; ch <= '0;
      out_valid <= 1'b0; out_item <= '0;
      for (int k = 0; k < LMAX; k++) begin a[k] <= '0; b[k] <= '0; prev[k] <= INF; cur[k] <= INF; end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        LOAD: if (in_valid && in_ready) begin
          if (in_item.tag == TAG_A) begin
            if (int'(na) < LMAX) begin a[IW'(na)] <= in_item.data[15:0]; na <= na + 1'b1; end
            if (in_item.last) a_done <= 1'b1;
          end else begin
            if (int'(nb) < LMAX) begin b[IW'(nb)] <= in_item.data[15:0]; nb <= nb + 1'b1; end
            ch <= in_item.chan;
            if (in_item.last) b_done <= 1'b1;
          end
        end else if (a_done && b_done) begin
          i <= '0; j <= '0;
          for (int k = 0; k < LMAX; k++) begin prev[k] <= INF; cur[k] <= INF; end
          state <= (na == '0 || nb == '0) ? EMIT : CALC;
        end
        CALC: if (ce) begin
          cur[IW'(j)] <= cval;
          if (j + 1'b1 == nb) begin
            j <= '0;
            if (i + 1'b1 == na) state <= EMIT;
            else begin
              i <= i + 1'b1;
              for (int k = 0; k < LMAX; k++) begin
                prev[k] <= (LW'(k) == j) ? cval : cur[k];
                cur[k]  <= INF;
              end
            end
          end else j <= j + 1'b1;
        end
        EMIT: if (ce && (!out_valid || out_ready)) begin
          logic [33:0] d;
          d = (na == '0 || nb == '0) ? INF : cur[IW'(nb - 1'b1)];
          out_valid     <= 1'b1;
          out_item      <= '0;
          out_item.data <= (d > 34'hFFFFFFFF) ? 32'hFFFFFFFF : d[31:0];
          out_item.chan <= ch;
          out_item.last <= 1'b1;
          na <= '0; nb <= '0; a_done <= 1'b0; b_done <= 1'b0;
          state <= LOAD;
        end
        default: state <= LOAD;
      endcase
    end
  end
endmodule
