// Testbench for dwt: random sample pairs on interleaved electrodes; the
// expected Haar approximation and detail of every pair are computed here.
module tb_dwt;
  import hull_pkg::*;
  localparam int NCH = 3;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint first [NCH];
  int ph [NCH];
  longint expq [$];
  always #5 clk = ~clk;

  dwt #(.N_CH(NCH)) dut (.clk, .rst_n, .ce, .in_valid, .in_ready, .in_item,
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

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    longint e, a, d;
    e = expq.pop_front();
    a = longint'(signed'(out_item.data[31:16]));
    d = longint'(signed'(out_item.data[15:0]));
    check(a * 65536 + d, e, "haar coefficients");
  end

  initial begin
    for (int i = 0; i < NCH; i++) begin ph[i] = 0; first[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int ch;
      longint x;
      ch = $urandom_range(NCH - 1);
      x = longint'($urandom_range(60000)) - 30000;
      if (ph[ch] == 0) first[ch] = x;
      else expq.push_back(((first[ch] + x) >>> 1) * 65536 + ((first[ch] - x) >>> 1));
      ph[ch] ^= 1;
      in_item = '0;
      in_item.chan = CHAN_W'(ch);
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
