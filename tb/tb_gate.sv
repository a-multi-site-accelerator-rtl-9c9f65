// Testbench for gate: a reference model keeps the open-count of every
// electrode; conditions (per electrode and broadcast) and data items are
// issued in a random mix and the passed items are compared with the model.
module tb_gate;
  import hull_pkg::*;
  localparam int NCH = 4;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic [15:0] hold = 16'd3;
  logic cond_valid = 0, cond_ready;
  item_t cond_item;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  logic dropped;
  int checks = 0, failures = 0;
  int cnt [NCH];
  longint expq [$];
  int passed = 0, drops = 0, drops_seen = 0;
  always #5 clk = ~clk;

  gate #(.N_CH(NCH), .HOLD_W(16)) dut (.clk, .rst_n, .ce, .hold, .cond_valid, .cond_ready, .cond_item,
                                       .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item, .dropped);

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) check(out_item.data, expq.pop_front(), "passed item");
  always @(posedge clk) if (rst_n && dropped) drops_seen++;

  initial begin
    for (int i = 0; i < NCH; i++) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int r, ch;
      r = $urandom_range(9);
      ch = $urandom_range(NCH - 1);
      if (r < 2) begin
        int v;
        v = $urandom_range(1);
        cond_item = '0;
        cond_item.data = 32'(v);
        if (r == 0 && $urandom_range(4) == 0) begin
          cond_item.chan = CHAN_ALL;
          for (int i = 0; i < NCH; i++) cnt[i] = v ? 3 : 0;
        end else begin
          cond_item.chan = CHAN_W'(ch);
          cnt[ch] = v ? 3 : 0;
        end
        @(negedge clk); cond_valid = 1;
        @(posedge clk); #1 cond_valid = 0;
      end else begin
        in_item = '0;
        in_item.chan = CHAN_W'(ch);
        in_item.data = 32'(n);
        if (cnt[ch] > 0) begin expq.push_back(n); cnt[ch]--; passed++; end
        else drops++;
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
    end
    repeat (10) @(posedge clk);
    check(expq.size(), 0, "all passed items seen");
    check(drops_seen, drops, "dropped count");
    check(passed > 50, 1, "items passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
