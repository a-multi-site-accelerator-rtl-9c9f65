// Testbench for ngram: random dot products on two electrodes, n = 3, blocks
// of 20 sketches. The testbench keeps its own n-gram counts per electrode and
// computes the weighted min-hash (smallest H(g)/c, exact rational compare)
// with its own copy of the integer hash. The scan time (2^n + 1 cycles plus
// emit) is checked.
module tb_ngram;
  import hull_pkg::*;
  localparam int NCH = 2, N = 3, BLK = 20;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  int cnt [NCH][1 << N];
  int hist [NCH], seen [NCH];
  longint expq [$];
  int stall_max = 0;
  always #5 clk = ~clk;

  ngram #(.N_CH(NCH), .NMAX(6)) dut (.clk, .rst_n, .ce, .n_len(3'(N)), .blk(8'(BLK)), .seed(SEED),
      .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

  function automatic logic [31:0] hmix(logic [31:0] x, logic [31:0] s);
    logic [31:0] h;
    h = x ^ s;
    h = (h ^ (h >> 16)) * 32'h7FEB352D;
    h = (h ^ (h >> 15)) * 32'h846CA68B;
    return h ^ (h >> 16);
  endfunction

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) check(out_item.data, expq.pop_front(), "ngram hash");

  initial begin
    for (int c = 0; c < NCH; c++) begin
      hist[c] = 0; seen[c] = 0;
      for (int g = 0; g < (1 << N); g++) cnt[c][g] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the count memory is cleared after reset before input is taken
    while (!in_ready) @(posedge clk);
    for (int t = 0; t < 1000; t++) begin
      int ch, b, t0;
      longint d;
      ch = $urandom_range(NCH - 1);
      // biased signs so that counts differ
      d = longint'($urandom_range(1000)) - ((ch == 0) ? 300 : 700);
      b = (d > 0) ? 1 : 0;
      hist[ch] = ((hist[ch] << 1) | b) & ((1 << N) - 1);
      if (seen[ch] + 1 >= N) cnt[ch][hist[ch]]++;
      seen[ch]++;
      if (seen[ch] == BLK) begin
        int best, bh, bc;
        best = -1; bh = 0; bc = 0;
        for (int g = 0; g < (1 << N); g++) begin
          int h;
          h = int'(hmix(32'(g), SEED) & 32'hFFFF) | 1;
          if (cnt[ch][g] > 0 && (best < 0 || longint'(h) * bc < longint'(bh) * cnt[ch][g])) begin
            best = g; bh = h; bc = cnt[ch][g];
          end
          cnt[ch][g] = 0;
        end
        expq.push_back(hmix(32'(best), ~SEED) & 255);
        seen[ch] = 0;
      end
      in_item = '0;
      in_item.chan = CHAN_W'(ch);
      in_item.data = 32'(d);
      @(negedge clk); in_valid = 1; t0 = $time;
      while (!in_ready) @(negedge clk);
      if (($time - t0) / 10 > stall_max) stall_max = ($time - t0) / 10;
      @(posedge clk); #1 in_valid = 0;
    end
    repeat (50) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    check(stall_max, (1 << N) + 1, "scan cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
