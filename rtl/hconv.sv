// hconv: first stage of hash generation. For every electrode it keeps the
// last WMAX samples; each time "step" new samples of an electrode have
// arrived (and at least "win" are held) it computes the dot product of the
// most recent "win" samples with a pseudo-random vector r of +1/-1 entries:
//   dot = sum_{n=0}^{win-1} r[n] * x[t-win+1+n]
// r[n] is bit 0 of a 16-bit Galois LFSR (taps 0xB400) restarted from "seed"
// for every window, so all windows of all nodes use the same vector when
// they share the seed. The item sent on carries the signed dot product;
// NGRAM takes its sign as the sketch bit and EMDH its magnitude. Window and
// step are registers, as the paper asks (they select Euclidean, XCOR or DTW
// hash behaviour). One product per enabled cycle: a window takes win+1
// cycles, during which no sample is accepted. The +1/-1 vector and the LFSR
// are this design's choices; the paper only says "a random vector".
// The output item keeps the electrode and tag of the sample that completed
// the window, and copies that sample's last flag, so a window-synchronous
// batch marker on the ADC stream survives into the hash stream.
module hconv
  import hull_pkg::*;
#(
  parameter int N_CH = 96,
  parameter int WMAX = 120
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [7:0]  win,    // 1..WMAX
  input  logic [7:0]  step,   // 1..255
  input  logic [15:0] seed,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  localparam int AW = bits_for(WMAX);

  logic signed [SAMPLE_W-1:0] buf_m [N_CH * WMAX];
  logic [AW-1:0] wp    [N_CH];
  logic [7:0]    fill  [N_CH];
  logic [7:0]    since [N_CH];

  typedef enum logic [1:0] {IDLE, DOT, EMIT} state_e;
  state_e state;
  logic [CHAN_W-1:0] cur_ch;
  logic [1:0]        cur_tag;
  logic              cur_last;
  logic [7:0]        n;
  logic [15:0]       lfsr;
  logic signed [31:0] dot;
  logic [AW-1:0]     rd;
  logic signed [SAMPLE_W-1:0] xs;
  logic [CHAN_W-1:0] ich;

  assign ich = in_item.chan;
  assign in_ready = ce && (state == IDLE);

  // buffer position of sample n of the window (oldest first)
  always_comb begin
    int p;
    p = int'(wp[cur_ch]) - int'(win) + int'(n);
    if (p < 0) p += WMAX;                // wp - win + n lies in (-WMAX, WMAX)
    rd = AW'(p);
    xs = buf_m[int'(cur_ch) * WMAX + int'(rd)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      out_valid <= 1'b0; out_item <= '0;
      cur_ch <= '0; cur_tag <= '0; cur_last <= 1'b0; n <= '0; lfsr <= 16'h1; dot <= '0;
      for (int i = 0; i < N_CH; i++) begin
        wp[i] <= '0; fill[i] <= '0; since[i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        IDLE: if (in_valid && in_ready) begin
          buf_m[int'(ich) * WMAX + int'(wp[ich])] <= signed'(in_item.data[SAMPLE_W-1:0]);
          wp[ich] <= (int'(wp[ich]) == WMAX - 1) ? '0 : wp[ich] + 1'b1;
          if (fill[ich] != 8'hFF) fill[ich] <= fill[ich] + 1'b1;
          if (9'(fill[ich]) + 9'd1 >= 9'(win) && 9'(since[ich]) + 9'd1 >= 9'(step)) begin
            since[ich] <= '0;
            cur_ch <= ich; cur_tag <= in_item.tag; cur_last <= in_item.last;
            n <= '0; dot <= '0;
            lfsr <= (seed == '0) ? 16'h1 : seed;
            state <= DOT;
          end else begin
            since[ich] <= (since[ich] == 8'hFF) ? since[ich] : since[ich] + 1'b1;
          end
        end
        DOT: if (ce) begin
          dot  <= lfsr[0] ? dot + 32'(xs) : dot - 32'(xs);
          lfsr <= lfsr[0] ? ((lfsr >> 1) ^ 16'hB400) : (lfsr >> 1);
          if (n + 1'b1 >= win) state <= EMIT;
          n <= n + 1'b1;
        end
        EMIT: if (!out_valid || out_ready) begin
          out_valid     <= 1'b1;
          out_item.data <= dot;
          out_item.chan <= cur_ch;
          out_item.tag  <= cur_tag;
          out_item.last <= cur_last;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
