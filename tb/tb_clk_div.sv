// Testbench for clk_div: for several divisors k it counts the enable pulses
// over a fixed number of cycles and checks their spacing (exactly k cycles,
// or every cycle for k = 0 and 1).
module tb_clk_div;
  logic clk = 0, rst_n = 0;
  logic [7:0] k;
  logic ce;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clk_div #(.K_W(8)) dut (.clk, .rst_n, .k, .ce);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kv [6] = '{0, 1, 2, 3, 7, 16};
    k = 8'd1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (kv[i]) begin
      int pulses, last, gap_bad;
      @(negedge clk); k = 8'(kv[i]);
      // let the old count wrap
      repeat (40) @(negedge clk);
      pulses = 0; last = -1; gap_bad = 0;
      for (int c = 0; c < 320; c++) begin
        @(negedge clk);
        if (ce) begin
          if (last >= 0 && (c - last) != ((kv[i] < 2) ? 1 : kv[i])) gap_bad++;
          last = c;
          pulses++;
        end
      end
      check((pulses - 320 / ((kv[i] < 2) ? 1 : kv[i])) inside {0, 1} ? 0 : 1, 0, $sformatf("pulses for k=%0d", kv[i]));
      check(gap_bad, 0, $sformatf("pulse spacing for k=%0d", kv[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
