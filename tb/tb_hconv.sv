// Testbench for hconv: random samples on three interleaved electrodes with a
// window of 45 and a step of 15; the testbench keeps each electrode's history
// and its own LFSR (x^16+x^14+x^13+x^11, Galois form) to compute every
// expected dot product. The cycles a window takes (win+1 plus emit) are
// checked too.
module tb_hconv;
  import hull_pkg::*;
  localparam int NCH = 3, W = 45, S = 15;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint hist [NCH][$];
  int since [NCH];
  longint expq [$];
  int stall_max = 0;
  always #5 clk = ~clk;

  hconv #(.N_CH(NCH), .WMAX(120)) dut (.clk, .rst_n, .ce, .win(8'(W)), .step(8'(S)), .seed(16'hACE1),
      .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) check(longint'(signed'(out_item.data)), expq.pop_front(), "dot product");

  initial begin
    for (int i = 0; i < NCH; i++) since[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int ch, t0;
      longint x;
      ch = $urandom_range(NCH - 1);
      x = longint'($urandom_range(4000)) - 2000;
      hist[ch].push_back(x);
      if (hist[ch].size() > W) void'(hist[ch].pop_front());
      since[ch]++;
      if (hist[ch].size() == W && since[ch] >= S) begin
        longint d;
        logic [15:0] l;
        since[ch] = 0;
        d = 0; l = 16'hACE1;
        for (int n = 0; n < W; n++) begin
          d += l[0] ? hist[ch][n] : -hist[ch][n];
          l = l[0] ? ((l >> 1) ^ 16'hB400) : (l >> 1);
        end
        expq.push_back(d);
      end else if (since[ch] >= S) since[ch] = S;
      in_item = '0;
      in_item.chan = CHAN_W'(ch);
      in_item.data = 32'(x);
      @(negedge clk); in_valid = 1; t0 = $time;
      while (!in_ready) @(negedge clk);
      if (($time - t0) / 10 > stall_max) stall_max = ($time - t0) / 10;
      @(posedge clk); #1 in_valid = 0;
    end
    repeat (100) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    check(stall_max, W + 1, "window cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
