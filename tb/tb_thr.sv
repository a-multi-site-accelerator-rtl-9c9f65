// Testbench for thr: random signed values against a signed threshold, in both
// senses, with random back-pressure on the output.
module tb_thr;
  import hull_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic [31:0] threshold = 32'hFFFF_FF00; // -256
  logic invert = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint expq [$];
  always #5 clk = ~clk;

  thr dut (.clk, .rst_n, .ce, .threshold, .invert, .in_valid, .in_ready, .in_item,
           .out_valid, .out_ready, .out_item);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) check(out_item.data, expq.pop_front(), "decision");
  always @(posedge clk) out_ready <= ($urandom_range(2) != 0);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int x;
      if (n == 300) begin
        @(negedge clk);
        while (expq.size() != 0) @(negedge clk);
        invert = 1;
      end
      x = int'($urandom_range(1000)) - 500;
      expq.push_back(((x > -256) ? 1 : 0) ^ (n >= 300 ? 1 : 0));
      in_item = '0;
      in_item.data = 32'(x);
      @(negedge clk); in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1 in_valid = 0;
    end
    repeat (10) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
