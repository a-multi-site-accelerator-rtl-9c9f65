// Testbench for xcor: three electrodes with correlated random signals,
// reference electrode 0, windows of 120 samples every 40 samples. Expected
// lag sums are computed from the testbench's own copy of the windows.
module tb_xcor;
  import hull_pkg::*;
  localparam int NCH = 3, W = 120, NL = 4, S = 40;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint hist [NCH][$];
  int since [NCH];
  longint expq [$];
  always #5 clk = ~clk;

  xcor #(.N_CH(NCH), .WIN_L(W), .N_LAGS(NL)) dut (.clk, .rst_n, .ce, .ref_ch(7'd0), .step(8'(S)), .shift(5'd6),
      .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) check(longint'(signed'(out_item.data)), expq.pop_front(), "xcor lag");
  always @(posedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    for (int i = 0; i < NCH; i++) since[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      longint common;
      common = longint'($urandom_range(2000)) - 1000;
      for (int ch = 0; ch < NCH; ch++) begin
        longint x;
        x = common + longint'($urandom_range(600)) - 300;
        hist[ch].push_back(x);
        if (hist[ch].size() > W) void'(hist[ch].pop_front());
        since[ch]++;
        if (hist[ch].size() == W && since[ch] >= S) begin
          since[ch] = 0;
          for (int l = 0; l < NL; l++) begin
            longint acc;
            acc = 0;
            for (int n = 0; n + l < W; n++) acc += hist[ch][n] * hist[0][n + l];
            expq.push_back(acc >>> 6);
          end
        end
        in_item = '0;
        in_item.chan = CHAN_W'(ch);
        in_item.data = 32'(x);
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
    end
    repeat (1000) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
