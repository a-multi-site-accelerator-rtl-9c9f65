// xcor: cross-correlation feature. Every electrode's last WIN_L samples are
// kept in a circular buffer. Each time "step" new samples of electrode e have
// arrived (and its buffer is full) the PE computes, for lags l = 0..N_LAGS-1,
//   r[l] = (sum_{n=0}^{WIN_L-1-l} x_e[n] * x_ref[n+l]) >>> shift
// where x_ref is the current window of the reference electrode "ref_ch" and
// n = 0 is the oldest sample, and emits one item per lag (last on the final
// lag), saturated to 32 bits. One multiply-accumulate per enabled cycle:
// N_LAGS*WIN_L cycles per window, during which no sample is accepted. The
// paper names the PE and its use as a seizure feature; the reference-electrode
// pairing and the lag range are this design's choices.
// Lint note: the input last flag is not needed because windows are counted (unused-bit lint warning).
module xcor
  import hull_pkg::*;
#(
  parameter int N_CH   = 96,
  parameter int WIN_L  = 120,
  parameter int N_LAGS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce,
  input  logic [CHAN_W-1:0] ref_ch,
  input  logic [7:0]        step,
  input  logic [4:0]        shift,
  input  logic              in_valid,
  output logic              in_ready,
  input  item_t             in_item,
  output logic              out_valid,
  input  logic              out_ready,
  output item_t             out_item
);
  localparam int AW = bits_for(WIN_L);
  localparam int NW = bits_for(WIN_L + 1);
  localparam int LW = bits_for(N_LAGS + 1);

  logic signed [SAMPLE_W-1:0] buf_m [N_CH * WIN_L];
  logic [AW-1:0] wp    [N_CH];
  logic [7:0]    fill  [N_CH];
  logic [7:0]    since [N_CH];

  typedef enum logic [1:0] {IDLE, MAC, EMIT} state_e;
  state_e state;
  logic [CHAN_W-1:0] cur_ch;
  logic [1:0]        cur_tag;
  logic [LW-1:0]     lag;
  logic [NW-1:0]     n;
  logic signed [47:0] acc, accs;
  logic signed [SAMPLE_W-1:0] xa, xb;
  logic [CHAN_W-1:0] ich;

  assign ich = in_item.chan;
  assign in_ready = ce && (state == IDLE);
  assign accs = acc >>> shift;

  always_comb begin
    int pa, pb;
    pa = int'(wp[cur_ch]) + int'(n);
    if (pa >= WIN_L) pa -= WIN_L;
    if (pa >= WIN_L) pa -= WIN_L;
    pb = int'(wp[ref_ch]) + int'(n) + int'(lag);
    if (pb >= WIN_L) pb -= WIN_L;        // n + lag < WIN_L, so once is enough
    xa = buf_m[int'(cur_ch) * WIN_L + pa];
    xb = buf_m[int'(ref_ch) * WIN_L + pb];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      out_valid <= 1'b0; out_item <= '0;
      cur_ch <= '0; cur_tag <= '0; lag <= '0; n <= '0; acc <= '0;
      for (int i = 0; i < N_CH; i++) begin
        wp[i] <= '0; fill[i] <= '0; since[i] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        IDLE: if (in_valid && in_ready) begin
          buf_m[int'(ich) * WIN_L + int'(wp[ich])] <= signed'(in_item.data[SAMPLE_W-1:0]);
          wp[ich] <= (int'(wp[ich]) == WIN_L - 1) ? '0 : wp[ich] + 1'b1;
          if (int'(fill[ich]) < WIN_L) fill[ich] <= fill[ich] + 1'b1;
          if (int'(fill[ich]) >= WIN_L - 1 && since[ich] + 1'b1 >= step) begin
            since[ich] <= '0;
            cur_ch <= ich; cur_tag <= in_item.tag;
            lag <= '0; n <= '0; acc <= '0;
            state <= MAC;
          end else begin
            since[ich] <= since[ich] + 1'b1;
          end
        end
        MAC: if (ce) begin
          acc <= acc + 48'(xa) * 48'(xb);
          if (int'(n) + int'(lag) >= WIN_L - 1) state <= EMIT;
          else n <= n + 1'b1;
        end
        EMIT: if (!out_valid || out_ready) begin
          out_valid     <= 1'b1;
          out_item.data <= (accs > 48'sh7FFF_FFFF) ? 32'h7FFF_FFFF :
                           (accs < -48'sh8000_0000) ? 32'h8000_0000 : accs[31:0];
          out_item.chan <= cur_ch;
          out_item.tag  <= cur_tag;
          out_item.last <= (int'(lag) == N_LAGS - 1);
          acc <= '0; n <= '0;
          if (int'(lag) == N_LAGS - 1) state <= IDLE;
          else begin
            lag <= lag + 1'b1;
            state <= MAC;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
