// hcomp: hash compressor. It consumes the item stream of HFREQ (header,
// dictionary, indices) and writes one self-contained, byte-aligned bit stream
// per batch, most significant bit first:
//   N-1 (8 bits), D-1 (8 bits), the D dictionary values (8 bits each), then
//   for every run of equal consecutive indices: the index in ceil(log2 D)
//   bits followed by the run length n in Elias-gamma code (floor(log2 n)
//   zeros, then n in binary), and zero bits up to the next byte boundary.
// This is the paper's three-step scheme (dictionary coding, run-length coding
// of the indices, Elias-gamma coding of the run lengths); the exact field
// layout is this design's. Bytes leave as items (data[7:0]) with last on the
// final byte of a batch. Code words enter a 64-bit bit accumulator (up to 25
// bits per cycle) and one byte is drained per cycle, so an item is accepted
// per enabled cycle except for one extra cycle at the end of a batch.
// Lint note: only the 8-bit hash data and tag of an input item are used (unused-bit lint warning).
module hcomp
  import hull_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ce,
  input  logic  in_valid,
  output logic  in_ready,
  input  item_t in_item,
  output logic  out_valid,
  input  logic  out_ready,
  output item_t out_item
);
  typedef enum logic [1:0] {RUN, FINAL, PAD, DRAIN} state_e;
  state_e state;
  logic [63:0] acc;
  logic [6:0]  nbits;
  logic [3:0]  ib;        // index width
  logic [7:0]  cur_idx;
  logic [8:0]  run_len;

  // code word to append this cycle
  logic [31:0] code;
  logic [5:0]  len;
  logic        drain;
  logic        take;
  logic [7:0]  idx_in;

  function automatic logic [3:0] floor_log2(input logic [8:0] v);
    logic [3:0] l;
    l = '0;
    for (int b = 0; b < 9; b++) if (v[b]) l = 4'(b);
    return l;
  endfunction

  assign take   = in_valid && in_ready;
  assign idx_in = in_item.data[7:0];
  assign in_ready = ce && (state == RUN) && (nbits <= 7'd32);
  assign drain  = ce && (nbits >= 7'd8) && (!out_valid || out_ready) && (state != PAD);

  always_comb begin
    logic [3:0] l;
    code = '0;
    len  = '0;
    l    = floor_log2(run_len);
    if (take) begin
      case (in_item.tag)
        TAG_C: begin code = {16'd0, in_item.data[23:16] - 8'd1, in_item.data[7:0] - 8'd1}; len = 6'd16; end
        TAG_B: begin code = {24'd0, in_item.data[7:0]}; len = 6'd8; end
        default: begin
          // a new index closes the previous run
          if (run_len != '0 && idx_in != cur_idx) begin
            code = (32'(cur_idx) << (2 * l + 1)) | 32'(run_len);
            len  = 6'(ib) + 6'(2 * l + 1);
          end
        end
      endcase
    end else if (state == FINAL && ce) begin
      code = (32'(cur_idx) << (2 * l + 1)) | 32'(run_len);
      len  = 6'(ib) + 6'(2 * l + 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= RUN;
      acc <= '0; nbits <= '0; ib <= '0; cur_idx <= '0; run_len <= '0;
      out_valid <= 1'b0; out_item <= '0;
    end else begin
      logic [6:0] nb_next;
      nb_next = nbits - (drain ? 7'd8 : 7'd0) + 7'(len);
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (drain) begin
        out_valid     <= 1'b1;
        out_item      <= '0;
        out_item.data <= {24'd0, 8'(acc >> (nbits - 7'd8))};
        out_item.last <= (state == DRAIN) && (nbits == 7'd8);
      end
      if (len != '0) acc <= (acc << len) | 64'(code);
      nbits <= nb_next;
      case (state)
        RUN: if (take) begin
          if (in_item.tag == TAG_C) begin
            ib <= 4'(bits_for(int'(in_item.data[8:0])));
            run_len <= '0;
          end else if (in_item.tag == TAG_A) begin
            if (run_len != '0 && idx_in == cur_idx) run_len <= run_len + 1'b1;
            else begin cur_idx <= idx_in; run_len <= 9'd1; end
            if (in_item.last) state <= FINAL;
          end
        end
        FINAL: if (ce) begin
          run_len <= '0;
          state <= PAD;
        end
        PAD: begin
          // round up to a whole number of bytes
          if (nbits[2:0] != '0) begin
            acc   <= acc << (7'd8 - {4'd0, nbits[2:0]});
            nbits <= {nbits[6:3] + 1'b1, 3'b000};
          end
          state <= DRAIN;
        end
        DRAIN: if (drain && nbits == 7'd8) state <= RUN;
        default: state <= RUN;
      endcase
    end
  end
endmodule
