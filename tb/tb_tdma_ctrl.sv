// Testbench for tdma_ctrl: programs an owner table, then follows the slot
// counter cycle by cycle against a reference timer, checking the slot number,
// the grant (owner match and the guard at the end of each slot) and the
// restart of the frame on a sync pulse.
module tb_tdma_ctrl;
  localparam int NS = 16;
  logic clk = 0, rst_n = 0;
  logic [15:0] slot_len = 16'd20, guard = 16'd5;
  logic [7:0] my_id = 8'd3;
  logic own_we = 0, sync = 0;
  logic [3:0] own_addr = 0;
  logic [7:0] own_id = 0;
  logic grant;
  logic [3:0] slot;
  int checks = 0, failures = 0;
  int owner [NS];
  int rt, rs, n_grant;
  always #5 clk = ~clk;

  tdma_ctrl #(.N_SLOTS(NS), .SLOT_W(16)) dut (.clk, .rst_n, .slot_len, .guard, .my_id, .own_we, .own_addr,
      .own_id, .sync, .grant, .slot);

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
    for (int i = 0; i < NS; i++) begin
      owner[i] = (i % 5 == 1 || i == 7) ? 3 : $urandom_range(2);
      @(negedge clk); own_we = 1; own_addr = 4'(i); own_id = 8'(owner[i]);
    end
    @(negedge clk); own_we = 0;
    // restart the frame and follow it
    sync = 1; @(negedge clk); sync = 0;
    rt = 0; rs = 0; n_grant = 0;
    for (int c = 0; c < 3000; c++) begin
      check(slot, rs, "slot");
      check(grant, owner[rs] == 3 && (20 - rt) >= 5, "grant");
      n_grant += int'(grant);
      if (c == 1234) begin
        sync = 1;
        @(negedge clk); sync = 0;
        rt = 0; rs = 0;
      end else begin
        @(negedge clk);
        rt++;
        if (rt == 20) begin rt = 0; rs = (rs + 1) % NS; end
      end
    end
    check(n_grant > 0, 1, "grant seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
