// Testbench for neo: random samples on interleaved electrodes; the expected
// energy psi = x[n-1]^2 - x[n]x[n-2] and the threshold decision are
// computed in the testbench from its own copy of each electrode's history.
module tb_neo;
  import hull_pkg::*;
  localparam int NCH = 4;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic [31:0] thr_r = 32'd20000;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint h1 [NCH], h2 [NCH];
  longint expq [$];
  int spikes = 0;
  always #5 clk = ~clk;

  neo #(.N_CH(NCH)) dut (.clk, .rst_n, .ce, .thr(thr_r), .in_valid, .in_ready, .in_item,
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
    longint e;
    e = expq.pop_front();
    check(longint'(signed'(out_item.data)), e, "neo psi");
  end

  always @(posedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    for (int i = 0; i < NCH; i++) begin h1[i] = 0; h2[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int ch;
      longint x, psi;
      ch = $urandom_range(NCH - 1);
      x = (n % 37 == 0) ? longint'($urandom_range(3000)) : longint'($urandom_range(400)) - 200;
      psi = h1[ch] * h1[ch] - x * h2[ch];
      expq.push_back((psi > 20000) ? psi : 0);
      if (psi > 20000) spikes++;
      h2[ch] = h1[ch]; h1[ch] = x;
      in_item = '0;
      in_item.chan = CHAN_W'(ch);
      in_item.data = 32'(x);
      @(negedge clk); in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1 in_valid = 0;
    end
    repeat (10) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    check(spikes > 10, 1, "spikes were detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
