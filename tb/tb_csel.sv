// Testbench for csel: rounds of collision flags for 96 electrodes in random
// order (some rounds with none set); after the round's last item the selected
// electrodes must come out in ascending order, one per cycle, with last on
// the final one, or a single empty marker.
module tb_csel;
  import hull_pkg::*;
  localparam int NCH = 96;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  int expq [$];                 // electrode, or -1 for the empty marker
  logic bp = 1;
  int t_last_in, n_out;
  always #5 clk = ~clk;

  csel #(.N_CH(NCH)) dut (.clk, .rst_n, .ce, .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    e = expq.pop_front();
    if (e < 0) begin
      check(out_item.tag, TAG_C, "empty marker");
      check(out_item.last, 1, "empty last");
    end else begin
      check(out_item.chan, e, "electrode");
      check(out_item.last, expq.size() == 0, "last");
    end
    n_out++;
  end
  always @(posedge clk) out_ready <= bp ? ($urandom_range(3) != 0) : 1'b1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 40; rnd++) begin
      int order [NCH];
      bit hit [NCH];
      int nh;
      bp = (rnd % 2 == 0);
      for (int i = 0; i < NCH; i++) begin order[i] = i; hit[i] = (rnd % 7 != 0) && ($urandom_range(9) == 0); end
      for (int i = NCH - 1; i > 0; i--) begin int j, t; j = $urandom_range(i); t = order[i]; order[i] = order[j]; order[j] = t; end
      nh = 0;
      for (int i = 0; i < NCH; i++) if (hit[i]) begin expq.push_back(i); nh++; end
      if (nh == 0) expq.push_back(-1);
      for (int i = 0; i < NCH; i++) begin
        in_item = '0;
        in_item.chan = CHAN_W'(order[i]);
        in_item.data = 32'(hit[order[i]]);
        in_item.last = (i == NCH - 1);
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      t_last_in = $time / 10; n_out = 0;
      while (expq.size() != 0) @(posedge clk);
      if (!bp) check(($time / 10 - t_last_in) <= n_out + 2, 1, "one electrode per cycle");
    end
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
