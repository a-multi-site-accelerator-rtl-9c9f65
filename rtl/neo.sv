// neo: non-linear energy operator spike detector. For every electrode it keeps
// the two previous samples and computes, when sample x[n] arrives,
//   psi = x[n-1]^2 - x[n] * x[n-2]
// which peaks on the sharp, narrow waveform of an action potential. The item
// sent on carries psi in its data field when psi exceeds the threshold "thr"
// and 0 otherwise, so that a GATE can use it directly as its condition
// (non-zero = spike). Samples of different electrodes may be interleaved in
// any order: state is kept per electrode (chan). One sample is accepted per
// enabled cycle; the result appears one cycle later. The paper only names the
// operator; the formula is the standard NEO and the threshold is this design's.
module neo
  import hull_pkg::*;
#(
  parameter int N_CH = 96
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [31:0] thr,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  logic signed [SAMPLE_W-1:0] x1 [N_CH];
  logic signed [SAMPLE_W-1:0] x2 [N_CH];
  logic signed [SAMPLE_W-1:0] x0;
  logic signed [33:0] psi;
  logic [CHAN_W-1:0] ch;

  assign ch = in_item.chan;
  assign x0 = signed'(in_item.data[SAMPLE_W-1:0]);
  assign in_ready = ce && (!out_valid || out_ready);

  always_comb begin
    psi = 34'(x1[ch]) * 34'(x1[ch]) - 34'(x0) * 34'(x2[ch]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_item  <= '0;
      for (int i = 0; i < N_CH; i++) begin
        x1[i] <= '0;
        x2[i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        x2[ch] <= x1[ch];
        x1[ch] <= x0;
        out_valid     <= 1'b1;
        out_item.chan <= ch;
        out_item.tag  <= in_item.tag;
        out_item.last <= in_item.last;
        out_item.data <= (psi > signed'({2'b00, thr})) ? psi[31:0] : 32'd0;
      end
    end
  end
endmodule
