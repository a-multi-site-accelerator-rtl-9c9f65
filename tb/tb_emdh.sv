// Testbench for emdh: random signed dot products; the expected hash
// ((a*floor(sqrt|d|) + b) >> shift) mod 256 uses the testbench's own
// square root by search. The fixed latency (input accepted to output valid)
// is checked to be 18 cycles.
module tb_emdh;
  import hull_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint expq [$];
  longint tq [$];
  int lat_bad = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) tq.push_back($time);
  always #5 clk = ~clk;

  emdh dut (.clk, .rst_n, .ce, .a(16'd37), .b(32'd1000), .shift(5'd3), .in_valid, .in_ready, .in_item,
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
    check(out_item.data, expq.pop_front(), "emd hash");
    if (($time - tq.pop_front()) / 10 != 18) lat_bad++;
  end

  function automatic longint isqrt(longint v);
    longint r;
    r = longint'($sqrt(real'(v)));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      longint d, m;
      d = (i < 3) ? longint'(i) : longint'($urandom()) - 64'sh8000_0000;
      if (i == 3) d = 64'sh7FFF_FFFF;
      m = d < 0 ? -d : d;
      expq.push_back(((37 * isqrt(m) + 1000) >> 3) & 255);
      in_item = '0;
      in_item.data = 32'(d);
      @(negedge clk); in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1 in_valid = 0;
    end
    repeat (30) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    check(lat_bad, 0, "latency 18 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
