// Testbench for fft: two electrodes receive tones plus noise; after every
// "step" samples of an electrode (once its window is full) the testbench
// computes the expected bin powers with its own floating-point twiddles,
// rounded to Q1.14, and compares them with the PE's output (tolerance of one
// part in 10^3 for rounding differences of the twiddles). The number of
// cycles a window takes is checked against N_BINS*(WIN+2)+small overhead.
module tb_fft;
  import hull_pkg::*;
  localparam int NCH = 2, W = 120, NB = 4;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint hist [NCH][$];
  longint expq [$];
  int since [NCH];
  int windows = 0;
  always #5 clk = ~clk;

  fft #(.N_CH(NCH), .WIN_L(W), .N_BINS(NB)) dut (.clk, .rst_n, .ce, .step(8'd60), .bin_base(7'd2), .pshift(5'd16),
      .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

  task automatic check_tol(input longint got, input longint exp, input string what);
    longint d;
    checks++;
    d = got - exp; if (d < 0) d = -d;
    if (d > exp / 1000 + 4) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) check_tol(out_item.data, expq.pop_front(), "bin power");

  function automatic void expect_window(int ch);
    for (int b = 0; b < NB; b++) begin
      longint re, im, p;
      int k;
      k = 2 + b;
      re = 0; im = 0;
      for (int n = 0; n < W; n++) begin
        real a;
        longint c, s;
        a = 2.0 * 3.141592653589793 * ((k * n) % W) / W;
        c = longint'($rtoi($cos(a) * 16384.0 + ($cos(a) >= 0 ? 0.5 : -0.5)));
        s = longint'($rtoi($sin(a) * 16384.0 + ($sin(a) >= 0 ? 0.5 : -0.5)));
        re += hist[ch][n] * c;
        im -= hist[ch][n] * s;
      end
      re = re >>> 16; im = im >>> 16;
      p = re * re + im * im;
      if (p > 64'h7FFF_FFFF) p = 64'h7FFF_FFFF;
      expq.push_back(p);
    end
  endfunction

  initial begin
    int t0, cyc_max;
    cyc_max = 0;
    for (int i = 0; i < NCH; i++) since[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      for (int ch = 0; ch < NCH; ch++) begin
        longint x;
        x = longint'($rtoi(700.0 * $sin(2.0 * 3.141592653589793 * (3 + ch) * t / W))) + longint'($urandom_range(200)) - 100;
        hist[ch].push_back(x);
        if (hist[ch].size() > W) void'(hist[ch].pop_front());
        since[ch]++;
        if (hist[ch].size() == W && since[ch] >= 60) begin
          since[ch] = 0;
          expect_window(ch);
          windows++;
        end
        in_item = '0;
        in_item.chan = CHAN_W'(ch);
        in_item.data = 32'(x);
        @(negedge clk); in_valid = 1;
        t0 = $time;
        while (!in_ready) @(negedge clk);
        if (($time - t0) / 10 > cyc_max) cyc_max = ($time - t0) / 10;
        @(posedge clk); #1 in_valid = 0;
      end
    end
    repeat (2000) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d bins missing", expq.size()); end
    checks++;
    if (windows < 10) failures++;
    // a window takes N_BINS*(WIN+2) cycles plus the emit cycles
    checks++;
    if (cyc_max > NB * (W + 3) + 4 || cyc_max < NB * W) begin failures++; $display("FAIL window latency %0d", cyc_max); end
    $display("windows=%0d max stall=%0d cycles", windows, cyc_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
