// bbf: Butterworth band-pass filter, one second-order section per electrode
// (a first-order Butterworth band-pass is exactly one such section), in
// direct form I with programmable Q2.14 coefficients:
//   y[n] = (b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2]) >>> 14
// y is saturated to 16 bits. In energy mode (mode = 0) the PE sums y^2 per
// electrode and, every "step" samples of that electrode, emits the band
// energy sum >> eshift as one item (last = 1) and clears the sum; in filter
// mode (mode = 1) it emits every filtered sample. State is kept per electrode
// so samples of all electrodes may be interleaved. One sample per enabled
// cycle, one cycle of latency. The paper names the filter type; order,
// coefficient format and the energy feature are this design's choices.
module bbf
  import hull_pkg::*;
#(
  parameter int N_CH = 96
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ce,
  input  logic signed [15:0] b0, b1, b2, a1, a2,
  input  logic               mode,
  input  logic [7:0]         step,
  input  logic [4:0]         eshift,
  input  logic               in_valid,
  output logic               in_ready,
  input  item_t              in_item,
  output logic               out_valid,
  input  logic               out_ready,
  output item_t              out_item
);
  logic signed [15:0] x1 [N_CH], x2 [N_CH], y1 [N_CH], y2 [N_CH];
  logic [47:0] energy [N_CH];
  logic [7:0]  cnt [N_CH];
  logic [CHAN_W-1:0] ch;
  logic signed [15:0] x;
  logic signed [47:0] accv;
  logic signed [33:0] ys;
  logic signed [15:0] y;
  logic [47:0] e_next;

  assign ch = in_item.chan;
  assign x  = signed'(in_item.data[15:0]);
  assign in_ready = ce && (!out_valid || out_ready);

  always_comb begin
    accv = 48'(b0) * 48'(x) + 48'(b1) * 48'(x1[ch]) + 48'(b2) * 48'(x2[ch])
         - 48'(a1) * 48'(y1[ch]) - 48'(a2) * 48'(y2[ch]);
    ys = 34'(accv >>> 14);
    if (ys > 34'sd32767) y = 16'sd32767;
    else if (ys < -34'sd32768) y = -16'sd32768;
    else y = ys[15:0];
    e_next = energy[ch] + 48'(32'(y) * 32'(y));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_item  <= '0;
      for (int i = 0; i < N_CH; i++) begin
        x1[i] <= '0; x2[i] <= '0; y1[i] <= '0; y2[i] <= '0; energy[i] <= '0; cnt[i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        x2[ch] <= x1[ch]; x1[ch] <= x;
        y2[ch] <= y1[ch]; y1[ch] <= y;
        if (mode) begin
          out_valid     <= 1'b1;
          out_item      <= in_item;
          out_item.data <= 32'(y);
        end else if (cnt[ch] + 1'b1 >= step) begin
          logic [47:0] es;
          es = e_next >> eshift;
          cnt[ch]    <= '0;
          energy[ch] <= '0;
          out_valid     <= 1'b1;
          out_item.chan <= ch;
          out_item.tag  <= in_item.tag;
          out_item.last <= 1'b1;
          out_item.data <= (es > 48'h7FFF_FFFF) ? 32'h7FFF_FFFF : es[31:0];
        end else begin
          cnt[ch]    <= cnt[ch] + 1'b1;
          energy[ch] <= e_next;
        end
      end
    end
  end
endmodule
