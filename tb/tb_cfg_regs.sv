// Testbench for cfg_regs: checks the reset values, then random writes and
// reads against a reference copy of the register file.
module tb_cfg_regs;
  localparam int NR = 32;
  localparam logic [NR-1:0][31:0] RV = {NR{32'h0BAD_F00D}} ^ {NR{32'h1}};
  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [4:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [NR-1:0][31:0] regs;
  logic [31:0] ref_r [NR];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cfg_regs #(.N_REGS(NR), .RESET(RV)) dut (.clk, .rst_n, .we, .addr, .wdata, .rdata, .regs);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NR; i++) begin ref_r[i] = RV[i]; check(regs[i], RV[i], "reset value"); end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = ($urandom_range(1) == 1);
      addr = 5'($urandom_range(NR - 1));
      wdata = $urandom;
      #1 check(rdata, ref_r[addr], "read");
      @(posedge clk);
      if (we) ref_r[addr] = wdata;
      #1;
      for (int i = 0; i < NR; i++) check(regs[i], ref_r[i], "register");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
