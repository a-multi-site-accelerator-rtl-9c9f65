// fft: spectral feature extractor. Every electrode's samples are kept in a
// circular buffer of WIN samples (the 4 ms, 120-sample window). Each time
// "step" new samples of an electrode have arrived (and the buffer is full)
// the PE computes N_BINS bins X[k], k = bin_base .. bin_base+N_BINS-1,
//   X[k] = sum_n x[n] * exp(-j*2*pi*k*n/WIN)
// and emits, per bin, the power (Re^2 + Im^2) >> pshift as one item (chan =
// electrode, last on the final bin). Because 120 is not a power of two the
// bins are evaluated as direct DFT sums, one multiply-accumulate pair per
// cycle, which gives the values an FFT would. Twiddles are Q1.14 values
// computed at elaboration. While a window is computed (N_BINS*WIN cycles plus
// a few) no sample is accepted. The paper names the FFT PE and its use for
// seizure and movement-intent features; bin choice, scaling and the DFT
// evaluation order are this design's.
// Lint note: the input last flag is not needed because windows are counted (unused-bit lint warning).
module fft
  import hull_pkg::*;
#(
  parameter int N_CH   = 96,
  parameter int WIN_L  = 120,
  parameter int N_BINS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [7:0]  step,      // samples between windows (1..WIN_L)
  input  logic [6:0]  bin_base,
  input  logic [4:0]  pshift,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  localparam int AW = bits_for(WIN_L);
  localparam int NW = bits_for(WIN_L + 1);
  localparam int BW = bits_for(N_BINS + 1);

  function automatic real rcos(input real x);
    real t, s, xx;
    xx = x;
    while (xx > 3.141592653589793) xx -= 6.283185307179586;
    while (xx < -3.141592653589793) xx += 6.283185307179586;
    s = 1.0; t = 1.0;
    for (int i = 1; i < 20; i++) begin
      t = -t * xx * xx / ((2 * i - 1) * (2 * i));
      s += t;
    end
    return s;
  endfunction

  logic signed [15:0] cos_t [WIN_L];
  logic signed [15:0] sin_t [WIN_L];
  for (genvar i = 0; i < WIN_L; i++) begin : g_tw
    localparam real ANG = 6.283185307179586 * i / WIN_L;
    assign cos_t[i] = 16'(int'(rcos(ANG) * 16384.0));
    assign sin_t[i] = 16'(int'(rcos(ANG - 1.5707963267948966) * 16384.0));
  end

  logic signed [SAMPLE_W-1:0] buf_m [N_CH * WIN_L];
  logic [AW-1:0] wp   [N_CH];   // next write position = oldest sample
  logic [7:0]    fill [N_CH];   // samples held, saturates at WIN_L
  logic [7:0]    since[N_CH];   // samples since last window

  typedef enum logic [1:0] {IDLE, MAC, EMIT} state_e;
  state_e state;
  logic [CHAN_W-1:0] cur_ch;
  logic [1:0]        cur_tag;
  logic [BW-1:0]     bin;
  logic [NW-1:0]     n;        // sample index within window
  logic [AW-1:0]     tw;       // (k*n) mod WIN_L
  logic [AW-1:0]     kstep;    // k mod WIN_L
  logic              pipe_v;
  logic signed [SAMPLE_W-1:0] xs;
  logic signed [15:0] cs, sn;
  logic signed [47:0] acc_re, acc_im;
  logic signed [47:0] re_s, im_s;
  logic [AW-1:0] rd_idx;

  logic [CHAN_W-1:0] ich;
  assign ich = in_item.chan;
  assign in_ready = ce && (state == IDLE);

  // position in the circular buffer of sample n of the window
  always_comb begin
    int p;
    p = int'(wp[cur_ch]) + int'(n);
    if (p >= 2 * WIN_L) p -= WIN_L;
    if (p >= WIN_L) p -= WIN_L;
    rd_idx = AW'(p);
  end

  assign re_s = acc_re >>> pshift;
  assign im_s = acc_im >>> pshift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      out_valid <= 1'b0;
      out_item <= '0;
      cur_ch <= '0; cur_tag <= '0; bin <= '0; n <= '0; tw <= '0; kstep <= '0;
      pipe_v <= 1'b0; xs <= '0; cs <= '0; sn <= '0; acc_re <= '0; acc_im <= '0;
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
            bin <= '0; n <= '0; tw <= '0;
            kstep <= AW'(int'(bin_base) % WIN_L);
            acc_re <= '0; acc_im <= '0; pipe_v <= 1'b0;
            state <= MAC;
          end else begin
            since[ich] <= since[ich] + 1'b1;
          end
        end
        MAC: if (ce) begin
          // stage 1: fetch sample n and its twiddle
          if (int'(n) < WIN_L) begin
            xs <= buf_m[int'(cur_ch) * WIN_L + int'(rd_idx)];
            cs <= cos_t[tw];
            sn <= sin_t[tw];
            pipe_v <= 1'b1;
            n  <= n + 1'b1;
            tw <= (int'(tw) + int'(kstep) >= WIN_L) ? AW'(int'(tw) + int'(kstep) - WIN_L) : tw + kstep;
          end else begin
            pipe_v <= 1'b0;
            state  <= EMIT;
          end
          // stage 2: accumulate
          if (pipe_v) begin
            acc_re <= acc_re + 48'(xs) * 48'(cs);
            acc_im <= acc_im - 48'(xs) * 48'(sn);
          end
        end
        EMIT: if (!out_valid || out_ready) begin
          logic signed [63:0] p;
          p = 64'(re_s) * 64'(re_s) + 64'(im_s) * 64'(im_s);
          out_valid     <= 1'b1;
          out_item.data <= (p > 64'sh7FFF_FFFF) ? 32'h7FFF_FFFF : p[31:0];
          out_item.chan <= cur_ch;
          out_item.tag  <= cur_tag;
          out_item.last <= (int'(bin) == N_BINS - 1);
          acc_re <= '0; acc_im <= '0; pipe_v <= 1'b0;
          n <= '0; tw <= '0;
          kstep <= AW'((int'(bin_base) + int'(bin) + 1) % WIN_L);
          if (int'(bin) == N_BINS - 1) state <= IDLE;
          else begin
            bin <= bin + 1'b1;
            state <= MAC;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
