// hfreq: hash frequency sorter, the first step of hash compression. It
// collects a batch of "nb" hashes (one per electrode for one hash step),
// counting each 8-bit value as it arrives and noting how many distinct values
// there are (D). At the end of the batch it emits
//   1. a header item (tag 2): data = {N, D} (16 bits each),
//   2. the dictionary (tag 1): the D distinct values by descending count,
//      ties broken by first appearance in the batch,
//   3. the batch itself as dictionary indices (tag 0, chan = the hash's
//      electrode), in arrival order, last on the final one.
// Sorting is a selection sort over the batch: each pass scans the nb stored
// hashes for the largest remaining count (nb cycles) and retires it, so a
// batch takes about nb*(D+1) + nb + D cycles, fixed for given nb and D. Input
// is refused while a batch is sorted and emitted. The paper says only that
// HFREQ collects hashes and sorts them by frequency; the batch framing and
// output format are this design's.
// Lint note: nb is at most BATCH, so its top bit is unused; the input tag and last fields are ignored (unused-bit lint warnings).
module hfreq
  import hull_pkg::*;
#(
  parameter int BATCH = 96
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [7:0]  nb,        // hashes per batch, 1..BATCH
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  localparam int IW = bits_for(BATCH + 1);

  logic [7:0]        seq  [BATCH];
  logic [CHAN_W-1:0] sch  [BATCH];
  logic [8:0]        cnt  [256];
  logic [7:0]        rank [256];
  logic [IW-1:0]     n_in;
  logic [8:0]        d_cnt;

  typedef enum logic [2:0] {COLLECT, HDR, SCAN, DICT, IDX} state_e;
  state_e state;
  logic [IW-1:0] i;
  logic [8:0]    best_c;
  logic [7:0]    best_v;
  logic [8:0]    r;
  logic          out_free;
  logic [7:0]    hv;
  logic [7:0]    sv;

  assign out_free = !out_valid || out_ready;
  assign in_ready = ce && (state == COLLECT);
  assign hv = in_item.data[7:0];
  assign sv = seq[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= COLLECT;
      out_valid <= 1'b0; out_item <= '0;
      n_in <= '0; d_cnt <= '0; i <= '0; best_c <= '0; best_v <= '0; r <= '0;
      for (int k = 0; k < 256; k++) begin cnt[k] <= '0; rank[k] <= '0; end
      for (int k = 0; k < BATCH; k++) begin seq[k] <= '0; sch[k] <= '0; end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        COLLECT: if (in_valid && in_ready) begin
          seq[n_in] <= hv;
          sch[n_in] <= in_item.chan;
          cnt[hv]   <= cnt[hv] + 1'b1;
          if (cnt[hv] == '0) d_cnt <= d_cnt + 1'b1;
          if (n_in + 1'b1 >= IW'(nb)) state <= HDR;
          n_in <= n_in + 1'b1;
        end
        HDR: if (ce && out_free) begin
          out_valid     <= 1'b1;
          out_item.data <= {16'(n_in), 16'(d_cnt)};
          out_item.chan <= '0;
          out_item.tag  <= TAG_C;
          out_item.last <= 1'b0;
          i <= '0; best_c <= '0; r <= '0;
          state <= SCAN;
        end
        SCAN: if (ce) begin
          if (cnt[sv] > best_c) begin best_c <= cnt[sv]; best_v <= sv; end
          if (i + 1'b1 >= n_in) begin
            i <= '0;
            state <= DICT;
          end else i <= i + 1'b1;
        end
        DICT: if (ce) begin
          if (best_c == '0) begin
            state <= IDX;
          end else if (out_free) begin
            out_valid     <= 1'b1;
            out_item.data <= {24'd0, best_v};
            out_item.chan <= '0;
            out_item.tag  <= TAG_B;
            out_item.last <= 1'b0;
            rank[best_v]  <= r[7:0];
            cnt[best_v]   <= '0;
            r <= r + 1'b1;
            best_c <= '0;
            state <= SCAN;
          end
        end
        IDX: if (ce && out_free) begin
          out_valid     <= 1'b1;
          out_item.data <= {24'd0, rank[sv]};
          out_item.chan <= sch[i];
          out_item.tag  <= TAG_A;
          out_item.last <= (i + 1'b1 >= n_in);
          if (i + 1'b1 >= n_in) begin
            n_in <= '0; d_cnt <= '0; i <= '0;
            state <= COLLECT;
          end else i <= i + 1'b1;
        end
        default: state <= COLLECT;
      endcase
    end
  end
endmodule
