// emdh: EMD hash generator. It takes the dot product of a window with a
// random vector (from HCONV), computes the integer square root of its
// magnitude with a 16-step bit-serial (restoring) algorithm, and applies the
// linear function
//   h = ((a * sqrt(|dot|) + b) >> shift) mod 2^8
// giving an 8-bit hash in the item's data (electrode and tag kept). This is
// the paper's recipe (a linear function of the square root of the dot
// product); dropping the sign and the register names a, b, shift are this
// design's choices. Latency is a fixed 18 cycles per item; no new item is
// accepted meanwhile.
// Lint note: only the low 8 bits of the linear function form the hash (unused-bit lint warning).
module emdh
  import hull_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic [15:0] a,
  input  logic [31:0] b,
  input  logic [4:0]  shift,
  input  logic        in_valid,
  output logic        in_ready,
  input  item_t       in_item,
  output logic        out_valid,
  input  logic        out_ready,
  output item_t       out_item
);
  typedef enum logic [1:0] {IDLE, ROOT, EMIT} state_e;
  state_e state;
  logic [31:0] rem_v;     // value being rooted
  logic [31:0] res;       // partial root (grows to 16 bits)
  logic [31:0] bitv;      // current bit (4^k)
  item_t       hold;
  logic [31:0] mag;
  logic [47:0] lin;

  assign in_ready = ce && (state == IDLE);
  assign mag = in_item.data[31] ? (~in_item.data + 1'b1) : in_item.data;
  assign lin = (48'(a) * 48'(res[15:0]) + 48'(b)) >> shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      rem_v <= '0; res <= '0; bitv <= '0; hold <= '0;
      out_valid <= 1'b0; out_item <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        IDLE: if (in_valid && in_ready) begin
          hold  <= in_item;
          rem_v <= mag;
          res   <= '0;
          bitv  <= 32'h4000_0000;
          state <= ROOT;
        end
        ROOT: if (ce) begin
          if (rem_v >= res + bitv) begin
            rem_v <= rem_v - (res + bitv);
            res   <= (res >> 1) + bitv;
          end else begin
            res <= res >> 1;
          end
          bitv <= bitv >> 2;
          if (bitv == 32'd1) state <= EMIT;
        end
        EMIT: if (ce && (!out_valid || out_ready)) begin
          out_valid     <= 1'b1;
          out_item      <= hold;
          out_item.data <= {24'd0, lin[7:0]};
          state         <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
