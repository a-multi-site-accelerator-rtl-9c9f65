// unpack: network unpacker, the receiving side of npack. Frames arrive as a
// byte stream (data[7:0]) with "last" on the final byte of each frame, as
// delivered by the radio. For each frame it
//   - collects the 11 header bytes and checks them against the header
//     CRC-32; a bad header (or a frame whose length does not match the
//     header) drops the whole frame, since nothing in it can be trusted;
//   - buffers the payload and checks the data CRC-32;
//   - on a bad data CRC drops the frame if it is a hash packet, and forwards
//     it anyway with "err" set for any other kind (signal data is still useful
//     with a few bit errors);
//   - forwards the payload as items of bytes_per_item(kind) bytes, most
//     significant first, with chan = position in the packet and last on the
//     final item; hdr_out holds the header of the packet being forwarded.
// Status pulses: pkt_ok (forwarded, clean), pkt_err (forwarded with a bad
// data CRC), pkt_drop (dropped). Reception takes one cycle per byte and
// forwarding one cycle per item. The CRC policy for hash versus signal
// packets follows the paper; the framing by "last" is this design's.
// Lint note: only the byte and last flag of an input item are used; the low CRC byte register is not needed after the compare (unused-bit lint warnings).
module unpack
  import hull_pkg::*;
#(
  parameter int MAXPAY = MAX_PKT - HDR_BYTES - 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ce,
  input  logic     in_valid,
  output logic     in_ready,
  input  item_t    in_item,
  output logic     out_valid,
  input  logic     out_ready,
  output item_t    out_item,
  output logic     out_err,
  output pkt_hdr_t hdr_out,
  output logic     pkt_ok,
  output logic     pkt_err,
  output logic     pkt_drop
);
  typedef enum logic [2:0] {HDR, HCRC, PAY, DCRC, SKIP, FWD} state_e;
  state_e state;
  logic [7:0]  pay [MAXPAY];
  logic [87:0] hdr_sr;
  pkt_hdr_t    hdr;
  logic [31:0] crc, rx_crc;
  logic [7:0]  k, pos;
  logic        derr;
  logic [7:0]  b;
  logic        lst;
  logic [2:0]  bpi;
  logic        out_free;

  assign b   = in_item.data[7:0];
  assign lst = in_item.last;
  assign hdr = pkt_hdr_t'(hdr_sr[87:4]);
  assign bpi = bytes_per_item(hdr.kind);
  assign out_free = !out_valid || out_ready;
  assign in_ready = ce && (state != FWD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= HDR;
      hdr_sr <= '0; crc <= '1; rx_crc <= '0; k <= '0; pos <= '0; derr <= 1'b0;
      out_valid <= 1'b0; out_item <= '0; out_err <= 1'b0; hdr_out <= '0;
      pkt_ok <= 1'b0; pkt_err <= 1'b0; pkt_drop <= 1'b0;
      for (int i = 0; i < MAXPAY; i++) pay[i] <= '0;
    end else begin
      pkt_ok <= 1'b0; pkt_err <= 1'b0; pkt_drop <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        case (state)
          HDR: begin
            hdr_sr <= {hdr_sr[79:0], b};
            crc <= crc32_byte(crc, b);
            k <= k + 1'b1;
            if (lst) begin pkt_drop <= 1'b1; k <= '0; crc <= '1; end
            else if (k == 8'(HDR_BYTES - 1)) begin k <= '0; state <= HCRC; end
          end
          HCRC: begin
            rx_crc <= {b, rx_crc[31:8]};
            k <= k + 1'b1;
            if (lst) begin pkt_drop <= 1'b1; k <= '0; crc <= '1; state <= HDR; end
            else if (k == 8'd3) begin
              k <= '0;
              if ({b, rx_crc[31:8]} != ~crc || int'(hdr.len) > MAXPAY) state <= SKIP;
              else begin
                crc <= '1;
                state <= (hdr.len == '0) ? DCRC : PAY;
              end
            end
          end
          PAY: begin
            pay[k] <= b;
            crc <= crc32_byte(crc, b);
            k <= k + 1'b1;
            if (lst) begin pkt_drop <= 1'b1; k <= '0; crc <= '1; state <= HDR; end
            else if (k + 1'b1 == hdr.len) begin k <= '0; state <= DCRC; end
          end
          DCRC: begin
            rx_crc <= {b, rx_crc[31:8]};
            k <= k + 1'b1;
            if (k == 8'd3) begin
              logic bad;
              bad = ({b, rx_crc[31:8]} != ~crc);
              k <= '0; crc <= '1;
              if (!lst) state <= SKIP;            // frame longer than header says
              else if (bad && hdr.kind == PKT_HASH) begin pkt_drop <= 1'b1; state <= HDR; end
              else if (hdr.len == '0) begin
                if (bad) pkt_err <= 1'b1; else pkt_ok <= 1'b1;
                state <= HDR;
              end else begin
                derr <= bad; pos <= '0;
                state <= FWD;
              end
            end else if (lst) begin pkt_drop <= 1'b1; k <= '0; crc <= '1; state <= HDR; end
          end
          SKIP: if (lst) begin pkt_drop <= 1'b1; k <= '0; crc <= '1; state <= HDR; end
          default: ;
        endcase
      end else if (state == FWD && ce && out_free) begin
        logic [31:0] w;
        w = '0;
        for (int j = 0; j < 4; j++)
          if (3'(j) < bpi && int'(k) + j < MAXPAY) w = (w << 8) | 32'(pay[int'(k) + j]);
        out_valid     <= 1'b1;
        out_item.data <= w;
        out_item.chan <= CHAN_W'(pos);
        out_item.tag  <= (hdr.kind == PKT_SVM) ? TAG_D : TAG_A;
        out_item.last <= (int'(k) + int'(bpi) >= int'(hdr.len));
        out_err       <= derr;
        hdr_out       <= hdr;
        pos <= pos + 1'b1;
        k   <= k + 8'(bpi);
        if (int'(k) + int'(bpi) >= int'(hdr.len)) begin
          k <= '0;
          if (derr) pkt_err <= 1'b1; else pkt_ok <= 1'b1;
          state <= HDR;
        end
      end
    end
  end
endmodule
