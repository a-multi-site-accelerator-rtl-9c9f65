// Testbench for ccheck: rounds of random received hashes (up to a full table,
// sometimes more, which must be ignored) followed by random local hashes. The
// expected match flag comes from a plain set of the received values; the
// lookup time is checked against the binary-search bound of
// ceil(log2 N_REG) + 3 cycles per local hash.
module tb_ccheck;
  import hull_pkg::*;
  localparam int NR = 96;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic r_valid = 0, r_ready, q_valid = 0, q_ready, out_valid, out_ready = 1, full;
  item_t r_item, q_item, out_item;
  int checks = 0, failures = 0;
  logic [8:0] expq [$];
  always #5 clk = ~clk;

  ccheck #(.N_REG(NR)) dut (.clk, .rst_n, .ce, .r_valid, .r_ready, .r_item, .q_valid, .q_ready, .q_item,
      .out_valid, .out_ready, .out_item, .full);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [8:0] e;
    e = expq.pop_front();
    check(out_item.data, 32'(e[0]), "collision flag");
    check(out_item.chan, 7'(e[8:1]), "chan");
  end

  task automatic send_r(input item_t it);
    r_item = it;
    @(negedge clk); r_valid = 1;
    while (!r_ready) @(negedge clk);
    @(posedge clk); #1 r_valid = 0;
  endtask

  initial begin
    int worst;
    worst = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 30; rnd++) begin
      bit inset [256];
      int n;
      item_t it;
      for (int v = 0; v < 256; v++) inset[v] = 0;
      it = '0; it.tag = TAG_C;
      send_r(it);
      n = (rnd % 5 == 0) ? NR + 10 : $urandom_range(NR, 0);
      for (int i = 0; i < n; i++) begin
        it = '0; it.tag = TAG_B;
        it.data = (rnd % 3 == 0) ? $urandom_range(40) : $urandom_range(255);
        if (i < NR) inset[it.data[7:0]] = 1;
        send_r(it);
      end
      @(posedge clk) #1;
      check(full, n >= NR, "full flag");
      for (int i = 0; i < 50; i++) begin
        int t0;
        q_item = '0;
        q_item.chan = CHAN_W'(i);
        q_item.data = (rnd % 3 == 0) ? $urandom_range(60) : $urandom_range(255);
        expq.push_back({8'(i), inset[q_item.data[7:0]]});
        @(negedge clk); q_valid = 1;
        while (!q_ready) @(negedge clk);
        t0 = $time / 10;
        @(posedge clk); #1 q_valid = 0;
        while (expq.size() != 0) @(posedge clk);
        if ($time / 10 - t0 > worst) worst = $time / 10 - t0;
      end
    end
    check(worst <= $clog2(NR) + 3, 1, "lookup cycles");
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("worst lookup %0d cycles", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
