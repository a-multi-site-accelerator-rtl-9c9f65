// clk_div: per-PE frequency divider. Every PE is built for a maximum clock
// f_max and runs at f_max/k, k being a register the microcontroller writes,
// so that the PE is just fast enough for the number of electrodes it serves.
// As in the paper, a counter lets only one of every k clock pulses through;
// here the surviving pulse is a one-cycle clock enable "ce" rather than a
// gated clock, so all PEs of a node share one clock in simulation and
// synthesis (a clock-gating cell can be driven from ce in a real flow).
// k = 0 and k = 1 both give ce = 1 every cycle. A new k takes effect when the
// current count wraps.
module clk_div #(
  parameter int K_W = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [K_W-1:0] k,
  output logic           ce
);
  logic [K_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (cnt + 1'b1 >= k) cnt <= '0;
    else cnt <= cnt + 1'b1;
  end

  assign ce = (cnt == '0);
endmodule
