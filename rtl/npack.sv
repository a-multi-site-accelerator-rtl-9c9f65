// npack: network packer. It gathers payload from the item stream, wraps it
// in a packet and sends the packet out as a byte stream:
//   11 header bytes (the 84-bit header of hull_pkg::pkt_hdr_t followed by 4
//   zero bits, most significant byte first), the CRC-32 of those 11 bytes
//   (least significant byte first), the payload, and the CRC-32 of the
//   payload. The total never exceeds 256 bytes, so the payload is at most
//   MAXPAY = 256 - 11 - 8 = 237 bytes.
// Each input item gives bytes_per_item(kind) payload bytes (most significant
// first). A packet is closed when an item with "last" arrives or when the
// next item would not fit, so longer streams are split over several packets.
// The header takes dst, src, kind and flow from configuration inputs, the
// time stamp from "now" when the packet is closed, and a sequence number that
// counts packets. Payload is buffered first because the header carries the
// length; then one byte leaves per enabled cycle (len + 19 cycles). The
// 84-bit header, the 256-byte limit and the two CRC-32s follow the paper; the
// byte order and field order are this design's.
// Lint note: only the data bytes and last flag of an input item are used (unused-bit lint warning).
module npack
  import hull_pkg::*;
#(
  parameter int MAXPAY = MAX_PKT - HDR_BYTES - 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [7:0]  dst,
  input  logic [7:0]  src,
  input  logic [3:0]  kind,
  input  logic [7:0]  flow,
  input  logic [31:0] now,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item,
  output logic        pkt_sent      // one-cycle pulse per finished packet
);
  typedef enum logic [2:0] {FILL, HDR, HCRC, PAY, DCRC} state_e;
  state_e state;
  logic [7:0]  pay [MAXPAY];
  logic [7:0]  plen;
  logic [7:0]  k;
  logic [15:0] seq;
  logic [87:0] hdr_sr;
  logic [31:0] crc;
  logic [2:0]  bpi;
  logic        out_free;
  logic        take;

  assign bpi      = bytes_per_item(kind);
  assign out_free = !out_valid || out_ready;
  assign in_ready = ce && (state == FILL) && (int'(plen) + int'(bpi) <= MAXPAY);
  assign take     = in_valid && in_ready;

  task automatic send(input logic [7:0] b, input logic lst);
    out_valid     <= 1'b1;
    out_item      <= '0;
    out_item.data <= {24'd0, b};
    out_item.last <= lst;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= FILL;
      plen <= '0; k <= '0; seq <= '0; hdr_sr <= '0; crc <= '1;
      out_valid <= 1'b0; out_item <= '0; pkt_sent <= 1'b0;
      for (int i = 0; i < MAXPAY; i++) pay[i] <= '0;
    end else begin
      pkt_sent <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        FILL: if (take) begin
          logic [7:0] nl;
          for (int j = 0; j < 4; j++)
            if (3'(j) < bpi) pay[int'(plen) + j] <= 8'(in_item.data >> (8 * (int'(bpi) - 1 - j)));
          nl = plen + 8'(bpi);
          plen <= nl;
          // close on last, or when another item would not fit
          if (in_item.last || int'(nl) + int'(bpi) > MAXPAY) begin
            pkt_hdr_t h;
            h.dst = dst; h.src = src; h.kind = kind; h.flow = flow;
            h.seq = seq; h.time_stamp = now; h.len = nl;
            hdr_sr <= {h, 4'd0};
            seq <= seq + 1'b1;
            crc <= '1;
            k <= '0;
            state <= HDR;
          end
        end
        HDR: if (ce && out_free) begin
          send(hdr_sr[87:80], 1'b0);
          crc    <= crc32_byte(crc, hdr_sr[87:80]);
          hdr_sr <= hdr_sr << 8;
          k <= k + 1'b1;
          if (k == 8'(HDR_BYTES - 1)) begin k <= '0; state <= HCRC; end
        end
        HCRC: if (ce && out_free) begin
          send(8'(~crc >> (8 * k)), 1'b0);
          k <= k + 1'b1;
          if (k == 8'd3) begin
            k <= '0; crc <= '1;
            state <= (plen == '0) ? DCRC : PAY;
          end
        end
        PAY: if (ce && out_free) begin
          send(pay[k], 1'b0);
          crc <= crc32_byte(crc, pay[k]);
          k <= k + 1'b1;
          if (k + 1'b1 == plen) begin k <= '0; state <= DCRC; end
        end
        DCRC: if (ce && out_free) begin
          send(8'(~crc >> (8 * k)), k == 8'd3);
          k <= k + 1'b1;
          if (k == 8'd3) begin
            k <= '0; plen <= '0; pkt_sent <= 1'b1;
            state <= FILL;
          end
        end
        default: state <= FILL;
      endcase
    end
  end
endmodule
