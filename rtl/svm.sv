// svm: linear support vector machine. Features arrive on NIN streams (in the
// seizure pipeline: FFT bin powers, BBF band energy, XCOR lags). Each item
// belongs to an electrode (chan); its feature index within the electrode is
// base[p] + its position in the run of items of port p for that electrode
// (the run ends with last). The PE multiplies the feature by the weight
// w[chan*FPC + index], a 16-bit signed word in a weight memory written by
// the microcontroller, and adds it to the electrode's accumulator. When every
// enabled port has closed the electrode, its score (acc >>> wshift) + bias is
// either
//   mode 0: emitted as one item per electrode (seizure detection per
//           electrode), or
//   mode 1: added to the node sum; after n_elec electrodes the node's partial
//           classifier output is ready. A non-leader (n_part = 0) emits it
//           (tag 3) to be sent to the leader; the leader waits for n_part
//           partial sums on the part_* stream and emits the total (movement
//           intent, computed hierarchically as in the paper).
// One feature per enabled cycle (lowest port first), result one cycle later;
// while a result waits in the output register no feature is taken.
// The weight layout, the port bases and the fixed-point scaling are this
// design's; the hierarchical linear classifier is the paper's.
// Lint note: only the data field of a partial-score item is used (unused-bit lint warning).
module svm
  import hull_pkg::*;
#(
  parameter int N_CH = 96,
  parameter int FPC  = 16,
  parameter int NIN  = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ce,
  input  logic               mode,
  input  logic [NIN-1:0]     port_en,
  input  logic [3:0]         base [NIN],
  input  logic [31:0]        bias,
  input  logic [4:0]         wshift,
  input  logic [7:0]         n_elec,
  input  logic [7:0]         n_part,
  input  logic               w_we,
  input  logic [bits_for(N_CH*FPC)-1:0] w_addr,
  input  logic signed [15:0] w_data,
  input  logic [NIN-1:0]     in_valid,
  output logic [NIN-1:0]     in_ready,
  input  item_t [NIN-1:0]    in_item,
  input  logic               part_valid,
  output logic               part_ready,
  input  item_t              part_item,
  output logic               out_valid,
  input  logic               out_ready,
  output item_t              out_item
);
  localparam int WA = bits_for(N_CH * FPC);

  logic signed [15:0] wmem [N_CH * FPC];
  logic signed [47:0] acc  [N_CH];
  logic [3:0]         pos  [NIN][N_CH];
  logic [NIN-1:0]     done [N_CH];
  logic signed [47:0] node_sum;
  logic [7:0]         ecount, pcount;

  logic               free, take;
  int                 sel;
  item_t              it;
  logic [CHAN_W-1:0]  ch;
  logic [3:0]         fidx;
  logic signed [15:0] wv;
  logic signed [47:0] acc_n, score;
  logic [NIN-1:0]     done_n;
  logic               elec_done;

  // work only while the output register is empty, so that in_ready never
  // depends on out_ready (the SVM sits on both sides of a switch)
  assign free = ce && !out_valid;

  always_comb begin
    sel = 0;
    take = 1'b0;
    for (int p = NIN - 1; p >= 0; p--)
      if (in_valid[p] && port_en[p]) begin sel = p; take = 1'b1; end
    in_ready = '0;
    if (free && take) in_ready[sel] = 1'b1;
    // ports that are disabled are drained
    for (int p = 0; p < NIN; p++) if (!port_en[p]) in_ready[p] = 1'b1;
    it   = in_item[sel];
    ch   = it.chan;
    fidx = base[sel] + pos[sel][ch];
    wv   = wmem[WA'(int'(ch) * FPC + int'(fidx))];
    acc_n = acc[ch] + 48'(signed'(it.data)) * 48'(wv);
    done_n = done[ch];
    if (it.last) done_n[sel] = 1'b1;
    elec_done = ((done_n & port_en) == port_en);
    score = (acc_n >>> wshift) + 48'(signed'(bias));
  end

  // the leader accepts partial sums once its own sum is complete
  assign part_ready = free && !(take) && (ecount >= n_elec) && (pcount < n_part);

  function automatic logic [31:0] sat32(input logic signed [47:0] v);
    if (v > 48'sh7FFF_FFFF) return 32'h7FFF_FFFF;
    if (v < -48'sh8000_0000) return 32'h8000_0000;
    return v[31:0];
  endfunction

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_item <= '0;
      node_sum <= '0; ecount <= '0; pcount <= '0;
      for (int i = 0; i < N_CH; i++) begin
        acc[i] <= '0; done[i] <= '0;
        for (int p = 0; p < NIN; p++) pos[p][i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take && free) begin
        pos[sel][ch] <= it.last ? 4'd0 : pos[sel][ch] + 1'b1;
        if (elec_done) begin
          acc[ch]  <= '0;
          done[ch] <= '0;
          if (!mode) begin
            out_valid     <= 1'b1;
            out_item.data <= sat32(score);
            out_item.chan <= ch;
            out_item.tag  <= it.tag;
            out_item.last <= 1'b1;
          end else begin
            node_sum <= node_sum + score;
            ecount   <= ecount + 1'b1;
          end
        end else begin
          acc[ch]  <= acc_n;
          done[ch] <= done_n;
        end
      end else if (part_valid && part_ready) begin
        node_sum <= node_sum + 48'(signed'(part_item.data));
        pcount   <= pcount + 1'b1;
      end else if (mode && free && ecount >= n_elec && pcount >= n_part && n_elec != 0) begin
        out_valid     <= 1'b1;
        out_item.data <= sat32(node_sum);
        out_item.chan <= CHAN_ALL;
        out_item.tag  <= (n_part == 0) ? TAG_D : TAG_A;
        out_item.last <= 1'b1;
        node_sum <= '0; ecount <= '0; pcount <= '0;
      end
    end
  end
endmodule
