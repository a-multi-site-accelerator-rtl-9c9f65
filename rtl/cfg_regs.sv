// cfg_regs: configuration registers written by the microcontroller. A write
// (we, addr, wdata) updates one of N_REGS 32-bit registers at the next clock
// edge; rdata returns the register at addr in the same cycle. All registers
// are driven out in parallel; the node top level slices them into the PE and
// switch settings. Reset values come from the RESET parameter so that the
// node comes up running its default pipeline. The paper has the
// microcontroller configure the fabric; the register file form is this
// design's.
module cfg_regs #(
  parameter int N_REGS = 32,
  parameter logic [N_REGS-1:0][31:0] RESET = '0,
  localparam int AW = $clog2(N_REGS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [AW-1:0]          addr,
  input  logic [31:0]            wdata,
  output logic [31:0]            rdata,
  output logic [N_REGS-1:0][31:0] regs
);
  assign rdata = regs[addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) regs <= RESET;
    else if (we) regs[addr] <= wdata;
  end
endmodule
