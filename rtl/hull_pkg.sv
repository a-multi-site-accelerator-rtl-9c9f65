// hull_pkg: types and constants shared by every processing element (PE) of a
// Hull node. A node's PEs exchange "items" over valid/ready streams: one item
// carries a 32-bit data word, the electrode (or feature) index it belongs to,
// a 2-bit flow tag that lets two pipelines share a PE and still be routed to
// their own destinations, and a "last" bit that closes a window, vector or
// packet. The item format, the tag encoding and the helper functions are this
// design's own choices; the sizes (96 electrodes, 16-bit samples, 120-sample
// windows, 8-bit hashes, 4 KB NVM pages) are the ones the paper uses.
package hull_pkg;

  localparam int SAMPLE_W = 16;   // ADC resolution
  localparam int N_ELEC   = 96;   // electrodes per node
  localparam int WIN      = 120;  // 4 ms window at 30 kS/s
  localparam int HASH_W   = 8;    // one 8-bit hash per 120-sample window
  localparam int DATA_W   = 32;
  localparam int CHAN_W   = 7;
  localparam int PAGE_B   = 4096; // NVM page
  localparam logic [CHAN_W-1:0] CHAN_ALL = '1;

  // flow tags
  localparam logic [1:0] TAG_A = 2'd0;
  localparam logic [1:0] TAG_B = 2'd1;
  localparam logic [1:0] TAG_C = 2'd2;
  localparam logic [1:0] TAG_D = 2'd3;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [CHAN_W-1:0] chan;
    logic [1:0]        tag;
    logic              last;
  } item_t;

  localparam int ITEM_W = $bits(item_t);

  // packet kinds carried in the 4-bit kind field of the network header
  typedef enum logic [3:0] {
    PKT_HASH   = 4'd1,
    PKT_SIGNAL = 4'd2,
    PKT_SVM    = 4'd3,
    PKT_CTRL   = 4'd4
  } pkt_kind_e;

  // 84-bit packet header
  typedef struct packed {
    logic [7:0]  dst;
    logic [7:0]  src;
    logic [3:0]  kind;
    logic [7:0]  flow;
    logic [15:0] seq;
    logic [31:0] time_stamp;
    logic [7:0]  len;     // payload bytes
  } pkt_hdr_t;

  localparam int HDR_BYTES = 11; // 84 header bits + 4 zero bits
  localparam int MAX_PKT   = 256; // bytes on air, header and CRCs included

  // payload bytes carried per stream item: compressed hash streams are byte
  // streams, signal packets carry 16-bit samples, the rest 32-bit words
  function automatic logic [2:0] bytes_per_item(input logic [3:0] kind);
    case (kind)
      PKT_HASH:   return 3'd1;
      PKT_SIGNAL: return 3'd2;
      default:    return 3'd4;
    endcase
  endfunction

  // one byte step of the reflected CRC-32 (polynomial 0xEDB88320)
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] b);
    logic [31:0] c;
    c = crc ^ {24'd0, b};
    for (int i = 0; i < 8; i++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  // integer mixing function used as the seeded "random" hash H(x)
  function automatic logic [31:0] mix32(input logic [31:0] x, input logic [31:0] seed);
    logic [31:0] h;
    h = x ^ seed;
    h = (h ^ (h >> 16)) * 32'h7FEB352D;
    h = (h ^ (h >> 15)) * 32'h846CA68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // number of bits to hold values 0..n-1 (0 for n<=1)
  function automatic int unsigned bits_for(input int unsigned n);
    int unsigned b;
    b = 0;
    for (int i = 0; i < 32; i++) if ((64'd1 << i) < 64'(n)) b = i + 1;
    return b;
  endfunction

endpackage
