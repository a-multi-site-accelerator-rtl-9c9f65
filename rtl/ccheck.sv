// ccheck: hash collision check. Hashes received from other nodes arrive on
// the r_* stream and are inserted into a sorted table of N_REG registers in
// one cycle each (every register compares itself with the new value and
// either keeps its value, takes the new one or takes its lower neighbour's,
// so the table stays in ascending order). An item with tag 2 on r_* empties
// the table. Local hashes arrive on the q_* stream; each is looked up with a
// binary search over the filled part of the table (ceil(log2 N_REG)+1
// cycles) and leaves as an item with the same chan and last, data = 1 on a
// match ("collision") and 0 otherwise. When the table is full further
// received hashes are ignored and "full" stays high. The paper describes
// CCHECK as sorting received hashes into registers and checking local hashes
// against them; the register count is this design's choice (one hash per
// electrode of one remote node).
// Lint note: only the 8-bit hash, tag and last of a received item are used (unused-bit lint warning).
module ccheck
  import hull_pkg::*;
#(
  parameter int N_REG = 96
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ce,
  input  logic  r_valid,
  output logic  r_ready,
  input  item_t r_item,
  input  logic  q_valid,
  output logic  q_ready,
  input  item_t q_item,
  output logic  out_valid,
  input  logic  out_ready,
  output item_t out_item,
  output logic  full
);
  localparam int AW = bits_for(N_REG + 1);
  logic [7:0]  tab [N_REG];
  logic [AW-1:0] n_tab;
  logic        busy;
  logic [AW-1:0] lo, hi;     // search interval [lo, hi)
  logic [7:0]  key;
  item_t       qi;
  logic        hit;
  logic [AW-1:0] mid;
  logic          fresh;       // the last received hash closed a batch
  logic [AW-1:0] n_eff;

  assign full    = (n_tab == AW'(N_REG));
  assign n_eff   = fresh ? '0 : n_tab;
  assign r_ready = ce && !busy;
  assign q_ready = ce && !busy && !r_valid;       // received hashes go first
  assign mid     = AW'((int'(lo) + int'(hi)) / 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_tab <= '0; busy <= 1'b0; fresh <= 1'b0; lo <= '0; hi <= '0; key <= '0; qi <= '0; hit <= 1'b0;
      out_valid <= 1'b0; out_item <= '0;
      for (int i = 0; i < N_REG; i++) tab[i] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (r_valid && r_ready) begin
        fresh <= r_item.last;
        if (r_item.tag == TAG_C) n_tab <= '0;
        else if (n_eff != AW'(N_REG)) begin
          logic [7:0] v;
          v = r_item.data[7:0];
          for (int i = 0; i < N_REG; i++) begin
            if (AW'(i) < n_eff + 1'b1) begin
              if (AW'(i) == n_eff) begin
                // the slot just past the end takes the new value or the old last
                if (i == 0 || tab[i-1] <= v) tab[i] <= v;
                else tab[i] <= tab[i-1];
              end else if (tab[i] > v) begin
                if (i == 0 || tab[i-1] <= v) tab[i] <= v;
                else tab[i] <= tab[i-1];
              end
            end
          end
          n_tab <= n_eff + 1'b1;
        end
      end else if (q_valid && q_ready) begin
        key <= q_item.data[7:0];
        qi  <= q_item;
        lo  <= '0;
        hi  <= n_tab;
        hit <= 1'b0;
        busy <= 1'b1;
      end else if (busy && ce) begin
        if (lo < hi && !hit) begin
          if (tab[mid] == key) hit <= 1'b1;
          else if (tab[mid] < key) lo <= mid + 1'b1;
          else hi <= mid;
        end else if (!out_valid || out_ready) begin
          out_valid     <= 1'b1;
          out_item      <= qi;
          out_item.data <= {31'd0, hit};
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
