// ngram: second stage of the DTW hash (SSH-style). Each incoming item is a
// dot product from HCONV; its sign (dot > 0) is the sketch bit. For every
// electrode the PE keeps the last n sketch bits and, within a block of "blk"
// sketches, counts how often each n-gram (an n-bit value) occurs. At the end
// of a block the counts are reduced to one 8-bit hash by a deterministic
// weighted min-hash: every gram g with count c > 0 gets the score H(g)/c,
// where H is a seeded 16-bit integer hash, and the gram with the smallest
// score wins (compared by cross-multiplication, so no divider). The hash is
// the low 8 bits of a second integer hash of the winning gram. The scan takes
// exactly 2^n + 1 cycles whatever the counts are, which is the deterministic
// latency the paper asks for; the counts are cleared by the scan. The paper
// does not spell out its min-hash; this scoring rule is this design's.
// After reset the count memory is cleared one entry per cycle (N_CH * 2^NMAX
// cycles) before the first input is taken.
// Lint note: the hash is the low 8 bits of the mixed gram; the input last flag is not needed (unused-bit lint warnings).
module ngram
  import hull_pkg::*;
#(
  parameter int N_CH = 96,
  parameter int NMAX = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [2:0]  n_len,   // 1..NMAX
  input  logic [7:0]  blk,     // sketches per hash, >= 1
  input  logic [31:0] seed,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  localparam int G = 1 << NMAX;

  logic [7:0]      cnt  [N_CH * G];
  logic [NMAX-1:0] hist [N_CH];
  logic [7:0]      seen [N_CH];

  typedef enum logic [1:0] {INIT, IDLE, SCAN, EMIT} state_e;
  state_e state;
  logic [CHAN_W-1:0] cur_ch;
  logic [1:0]        cur_tag;
  logic [NMAX:0]     g;
  logic [NMAX-1:0]   best_g;
  logic [15:0]       best_h;
  logic [7:0]        best_c;
  logic              found;
  logic [CHAN_W-1:0] ich;
  logic              sbit;
  logic [NMAX-1:0]   mask, nh;
  logic [7:0]        c;
  logic [15:0]       h;
  logic [31:0]       hout;

  assign ich  = in_item.chan;
  assign sbit = signed'(in_item.data) > 0;
  assign mask = NMAX'((1 << n_len) - 1);
  assign nh   = {hist[ich][NMAX-2:0], sbit} & mask;
  assign in_ready = ce && (state == IDLE);

  // the count table is a plain memory with one write port: cleared entry by
  // entry after reset, incremented on input, cleared again while scanned
  logic              cnt_we;
  logic [$clog2(N_CH * G)-1:0] cnt_wa, ia;
  logic [7:0]        cnt_wd;
  assign ia = $bits(ia)'(int'(ich) * G + int'(nh));
  always_comb begin
    cnt_we = 1'b0;
    cnt_wa = ia;
    cnt_wd = cnt[ia] + 1'b1;
    case (state)
      INIT: begin cnt_we = 1'b1; cnt_wa = $bits(cnt_wa)'(int'(cur_ch) * G + int'(g[NMAX-1:0])); cnt_wd = '0; end
      IDLE: cnt_we = in_valid && in_ready && (seen[ich] + 1'b1 >= 8'(n_len));
      SCAN: begin
        cnt_we = ce && (g[NMAX-1:0] <= mask) && !g[NMAX] && (c != 0);
        cnt_wa = $bits(cnt_wa)'(int'(cur_ch) * G + int'(g[NMAX-1:0]));
        cnt_wd = '0;
      end
      default: ;
    endcase
  end
  always_ff @(posedge clk) if (cnt_we) cnt[cnt_wa] <= cnt_wd;

  assign c = cnt[int'(cur_ch) * G + int'(g[NMAX-1:0])];
  assign h = mix32({{(32-NMAX){1'b0}}, g[NMAX-1:0]}, seed) [15:0] | 16'h1;
  assign hout = mix32({{(32-NMAX){1'b0}}, best_g}, ~seed);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= INIT;
      out_valid <= 1'b0; out_item <= '0;
      cur_ch <= '0; cur_tag <= '0; g <= '0; best_g <= '0; best_h <= '0; best_c <= '0; found <= 1'b0;
      for (int i = 0; i < N_CH; i++) begin hist[i] <= '0; seen[i] <= '0; end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        INIT: begin
          // walk every (electrode, gram) entry once
          if (g[NMAX-1:0] == NMAX'(G - 1)) begin
            g <= '0;
            if (int'(cur_ch) == N_CH - 1) begin cur_ch <= '0; state <= IDLE; end
            else cur_ch <= cur_ch + 1'b1;
          end else g <= g + 1'b1;
        end
        IDLE: if (in_valid && in_ready) begin
          hist[ich] <= nh;
          if (seen[ich] + 1'b1 >= blk) begin
            seen[ich] <= '0;
            cur_ch <= ich; cur_tag <= in_item.tag;
            g <= '0; found <= 1'b0;
            state <= SCAN;
          end else begin
            seen[ich] <= seen[ich] + 1'b1;
          end
        end
        SCAN: if (ce) begin
          if (g[NMAX-1:0] <= mask && !g[NMAX]) begin
            if (c != 0) begin
              if (!found || (24'(h) * 24'(best_c) < 24'(best_h) * 24'(c))) begin
                best_g <= g[NMAX-1:0]; best_h <= h; best_c <= c; found <= 1'b1;
              end
            end
            if (g[NMAX-1:0] == mask) state <= EMIT;
            g <= g + 1'b1;
          end else state <= EMIT;
        end
        EMIT: if (!out_valid || out_ready) begin
          out_valid     <= 1'b1;
          out_item.data <= found ? {24'd0, hout[7:0]} : 32'd0;
          out_item.chan <= cur_ch;
          out_item.tag  <= cur_tag;
          out_item.last <= 1'b0;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
