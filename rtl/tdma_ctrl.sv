// tdma_ctrl: time-division access to the shared intra-body radio channel.
// Time is cut into slots of slot_len cycles; N_SLOTS slots form a frame and
// an owner table (written by the microcontroller through own_we/own_addr/
// own_id) says which node may transmit in each slot. "grant" is high while
// the current slot belongs to this node (my_id) and at least "guard" cycles
// of the slot remain, so a packet that starts under grant always ends inside
// the slot. A pulse on "sync" (the frame beacon) restarts slot 0. "slot"
// reports the current slot. The paper states that the nodes share the radio
// by TDMA; the table, the guard rule and the beacon are this design's.
module tdma_ctrl #(
  parameter int N_SLOTS = 16,
  parameter int SLOT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SLOT_W-1:0] slot_len,
  input  logic [SLOT_W-1:0] guard,
  input  logic [7:0]        my_id,
  input  logic              own_we,
  input  logic [$clog2(N_SLOTS)-1:0] own_addr,
  input  logic [7:0]        own_id,
  input  logic              sync,
  output logic              grant,
  output logic [$clog2(N_SLOTS)-1:0] slot
);
  logic [7:0]        owner [N_SLOTS];
  logic [SLOT_W-1:0] t;

  assign grant = (owner[slot] == my_id) && (slot_len - t >= guard);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; slot <= '0;
      for (int i = 0; i < N_SLOTS; i++) owner[i] <= 8'(i);
    end else begin
      if (own_we) owner[own_addr] <= own_id;
      if (sync) begin
        t <= '0; slot <= '0;
      end else if (t + 1'b1 >= slot_len) begin
        t <= '0;
        slot <= (int'(slot) == N_SLOTS - 1) ? '0 : slot + 1'b1;
      end else t <= t + 1'b1;
    end
  end
endmodule
