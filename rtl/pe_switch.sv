// pe_switch: programmable switch between processing elements. Each of the
// N_OUT destinations picks one of the N_IN sources (sel, en) and a tag mask
// (mask[d][t] = 1 lets items with tag t through). A source picked by several
// destinations is broadcast in lock step: its item is taken only when every
// destination that wants it has a free output register, and then it is
// copied to all of them in the same cycle; a destination whose mask rejects
// the tag simply does not receive that item. Sources picked by nobody are
// held (not ready). Every destination has one output register, so a path
// through the switch costs one cycle and can pass one item per cycle. The
// paper describes switches configured by the microcontroller that steer
// tagged flows between PEs; the single register stage and the lock-step
// broadcast rule are this design's.
module pe_switch
  import hull_pkg::*;
#(
  parameter int N_IN  = 4,
  parameter int N_OUT = 4,
  localparam int SW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_OUT-1:0][SW-1:0] sel,
  input  logic [N_OUT-1:0]     en,
  input  logic [N_OUT-1:0][3:0] mask,
  input  logic [N_IN-1:0]      in_valid,
  output logic [N_IN-1:0]      in_ready,
  input  item_t [N_IN-1:0]     in_item,
  output logic [N_OUT-1:0]     out_valid,
  input  logic [N_OUT-1:0]     out_ready,
  output item_t [N_OUT-1:0]    out_item
);
  logic [N_OUT-1:0] free;
  logic [N_IN-1:0]  wanted;
  logic [N_IN-1:0]  take;

  always_comb begin
    for (int d = 0; d < N_OUT; d++) free[d] = !out_valid[d] || out_ready[d];
    for (int s = 0; s < N_IN; s++) begin
      wanted[s]   = 1'b0;
      in_ready[s] = 1'b1;
      for (int d = 0; d < N_OUT; d++)
        if (en[d] && int'(sel[d]) == s) begin
          wanted[s] = 1'b1;
          if (!free[d]) in_ready[s] = 1'b0;
        end
      in_ready[s] = in_ready[s] && wanted[s];
      take[s] = in_valid[s] && in_ready[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_item  <= '0;
    end else begin
      for (int d = 0; d < N_OUT; d++) begin
        if (out_valid[d] && out_ready[d]) out_valid[d] <= 1'b0;
        if (en[d] && int'(sel[d]) < N_IN && take[sel[d]] && mask[d][in_item[sel[d]].tag]) begin
          out_valid[d] <= 1'b1;
          out_item[d]  <= in_item[sel[d]];
        end
      end
    end
  end
endmodule
