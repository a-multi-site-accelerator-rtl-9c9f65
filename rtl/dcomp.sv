// dcomp: hash decompressor, the inverse of hcomp. It reads the byte stream
// of one compressed batch (data[7:0] per item, most significant bit first),
// rebuilds the dictionary and emits the N hashes of the batch in their
// original order: data[7:0] = hash, chan = position in the batch, last on the
// final hash. Bits are pulled from a 16-bit buffer that only accepts a new
// byte when the field being decoded needs more bits than it holds, so the
// padding at the end of a batch is all that remains when the batch is done
// and it is simply discarded. Decoding takes one cycle per field and one
// cycle per emitted hash. The paper names the decompressor but gives no
// structure; this one is this design's.
module dcomp
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
  typedef enum logic [2:0] {HDR_N, HDR_D, DICT, IDX, GZERO, GTAIL, EMIT, DONE} state_e;
  state_e state;
  logic [15:0] buf_q;    // valid bits are buf_q[nbits-1:0], oldest at the top
  logic [4:0]  nbits;
  logic [8:0]  n_tot, d_tot, pos, dpos;
  logic [3:0]  ib, lz;
  logic [7:0]  idx;
  logic [8:0]  run;
  logic [7:0]  dict [256];
  logic [4:0]  need;
  logic        have;
  logic [7:0]  field;
  logic        out_free;

  assign out_free = !out_valid || out_ready;

  always_comb begin
    case (state)
      HDR_N, HDR_D, DICT: need = 5'd8;
      IDX:   need = 5'(ib);
      GZERO: need = 5'd1;
      GTAIL: need = 5'(lz);
      default: need = 5'd0;
    endcase
  end

  assign have     = nbits >= need;
  assign in_ready = ce && !have && (state != EMIT) && (state != DONE);
  // the next "need" bits, right aligned
  assign field    = 8'((32'(buf_q) >> (nbits - need)) & ((32'd1 << need) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= HDR_N;
      buf_q <= '0; nbits <= '0;
      n_tot <= '0; d_tot <= '0; pos <= '0; dpos <= '0;
      ib <= '0; lz <= '0; idx <= '0; run <= '0;
      out_valid <= 1'b0; out_item <= '0;
      for (int k = 0; k < 256; k++) dict[k] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        buf_q <= {buf_q[7:0], in_item.data[7:0]};
        nbits <= nbits + 5'd8;
      end else if (ce && have) begin
        nbits <= nbits - need;
        case (state)
          HDR_N: begin n_tot <= 9'(field) + 9'd1; state <= HDR_D; end
          HDR_D: begin
            d_tot <= 9'(field) + 9'd1;
            ib    <= 4'(bits_for(int'(field) + 1));
            dpos  <= '0;
            state <= DICT;
          end
          DICT: begin
            dict[dpos[7:0]] <= field;
            dpos <= dpos + 1'b1;
            if (dpos + 1'b1 >= d_tot) begin pos <= '0; state <= IDX; end
          end
          IDX: begin idx <= field; lz <= '0; state <= GZERO; end
          GZERO: begin
            if (field[0]) begin
              state <= (lz == '0) ? EMIT : GTAIL;
              run   <= 9'd1;
            end else lz <= lz + 1'b1;
          end
          GTAIL: begin
            run   <= (9'd1 << lz) | 9'(field);
            state <= EMIT;
          end
          EMIT: if (out_free) begin
            out_valid     <= 1'b1;
            out_item      <= '0;
            out_item.data <= {24'd0, dict[idx]};
            out_item.chan <= CHAN_W'(pos);
            out_item.last <= (pos + 1'b1 >= n_tot);
            pos <= pos + 1'b1;
            run <= run - 1'b1;
            if (pos + 1'b1 >= n_tot) state <= DONE;
            else if (run == 9'd1) state <= IDX;
          end
          DONE: begin
            nbits <= '0;          // drop the padding
            state <= HDR_N;
          end
          default: state <= HDR_N;
        endcase
      end
    end
  end
endmodule
