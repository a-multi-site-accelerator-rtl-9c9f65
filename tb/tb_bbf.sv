// Testbench for bbf: a band-pass biquad (b0 = 0.2, b1 = 0, b2 = -0.2,
// a1 = -1.5, a2 = 0.6 in Q2.14) runs on two interleaved electrodes; the
// testbench filters the same samples with its own integer model and checks
// the per-window band energy (mode 0) and then every filtered sample (mode 1).
module tb_bbf;
  import hull_pkg::*;
  localparam int NCH = 2;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic signed [15:0] b0 = 16'sd3277, b1 = 16'sd0, b2 = -16'sd3277, a1 = -16'sd24576, a2 = 16'sd9830;
  logic mode = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint x1 [NCH], x2 [NCH], y1 [NCH], y2 [NCH], en [NCH];
  int cnt [NCH];
  longint expq [$];
  always #5 clk = ~clk;

  bbf #(.N_CH(NCH)) dut (.clk, .rst_n, .ce, .b0, .b1, .b2, .a1, .a2, .mode, .step(8'd30), .eshift(5'd4),
                         .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) check(longint'(signed'(out_item.data)), expq.pop_front(), mode ? "filtered sample" : "band energy");

  initial begin
    for (int i = 0; i < NCH; i++) begin x1[i] = 0; x2[i] = 0; y1[i] = 0; y2[i] = 0; en[i] = 0; cnt[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1200; t++) begin
      int ch;
      longint x, y;
      ch = t % NCH;
      if (t == 600) begin
        @(negedge clk); while (expq.size() != 0) @(negedge clk);
        mode = 1;
      end
      x = longint'($rtoi(3000.0 * $sin(0.4 * t))) + longint'($urandom_range(400)) - 200;
      y = (3277 * x - 3277 * x2[ch] + 24576 * y1[ch] - 9830 * y2[ch]) >>> 14;
      if (y > 32767) y = 32767;
      if (y < -32768) y = -32768;
      x2[ch] = x1[ch]; x1[ch] = x; y2[ch] = y1[ch]; y1[ch] = y;
      if (t >= 600) expq.push_back(y);
      else begin
        en[ch] += y * y;
        cnt[ch]++;
        if (cnt[ch] == 30) begin
          longint e;
          e = en[ch] >> 4;
          expq.push_back(e > 64'h7FFF_FFFF ? 64'h7FFF_FFFF : e);
          en[ch] = 0; cnt[ch] = 0;
        end
      end
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
