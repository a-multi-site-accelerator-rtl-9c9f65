// Testbench for pe_switch: three sources and four destinations under random
// back-pressure. Routes (including broadcasts of one source to several
// destinations, tag masks and disabled destinations) are changed between
// phases. Every destination must receive exactly the items of its source
// whose tag it accepts, in order; a broadcast source must be taken in lock
// step; a source nobody picks must not be taken; and with no back-pressure a
// path must pass one item per cycle.
module tb_pe_switch;
  import hull_pkg::*;
  localparam int NI = 3, NO = 4;
  logic clk = 0, rst_n = 0;
  logic [NO-1:0][1:0] sel;
  logic [NO-1:0] en;
  logic [NO-1:0][3:0] mask;
  logic [NI-1:0] in_valid = '0, in_ready;
  item_t [NI-1:0] in_item;
  logic [NO-1:0] out_valid, out_ready = '1;
  item_t [NO-1:0] out_item;
  int checks = 0, failures = 0;
  item_t expq [NO][$];
  int taken [NI];
  logic bp = 1;
  int n_items_out;
  always #5 clk = ~clk;

  pe_switch #(.N_IN(NI), .N_OUT(NO)) dut (.clk, .rst_n, .sel, .en, .mask, .in_valid, .in_ready, .in_item,
      .out_valid, .out_ready, .out_item);

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

  // scoreboard: what each destination must see, built when a source is taken
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < NO; d++)
      if (out_valid[d] && out_ready[d]) begin
        item_t e;
        e = expq[d].pop_front();
        check(out_item[d], e, $sformatf("item at destination %0d", d));
        n_items_out++;
      end
    for (int s = 0; s < NI; s++)
      if (in_valid[s] && in_ready[s]) begin
        bit any;
        any = 0;
        taken[s]++;
        for (int d = 0; d < NO; d++)
          if (en[d] && sel[d] == 2'(s)) begin
            any = 1;
            if (mask[d][in_item[s].tag]) expq[d].push_back(in_item[s]);
          end
        check(any, 1, "only picked sources are taken");
      end
  end
  always @(posedge clk) for (int d = 0; d < NO; d++) out_ready[d] <= bp ? ($urandom_range(2) != 0) : 1'b1;

  // each source offers a new random item whenever the last one was taken
  for (genvar s = 0; s < NI; s++) begin : g_src
    always @(posedge clk) if (rst_n) begin
      if (!in_valid[s] || in_ready[s]) begin
        in_valid[s] <= ($urandom_range(3) != 0);
        in_item[s] <= item_t'({$urandom, 10'($urandom)});
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    for (int s = 0; s < NI; s++) taken[s] = 0;
    en = '0; sel = '0; mask = '0;
    rst_n = 1;
    for (int ph = 0; ph < 12; ph++) begin
      int t0, n0;
      // stop the sources, drain, then change routes
      bp = (ph % 3 != 2);
      @(negedge clk);
      for (int d = 0; d < NO; d++) begin
        en[d] = (ph == 11) ? 1'b1 : ($urandom_range(3) != 0);
        sel[d] = (ph % 4 == 0) ? 2'd0 : 2'($urandom_range(NI - 1));
        mask[d] = (ph % 3 == 2) ? 4'hF : 4'($urandom_range(15));
      end
      t0 = $time / 10; n0 = n_items_out;
      repeat (300) @(posedge clk);
      if (ph % 3 == 2 && ph % 4 == 0) check(n_items_out - n0 > 100, 1, "broadcast throughput");
      // drain: keep routes, let the queues empty
      en = en;
      repeat (20) @(posedge clk);
    end
    check(taken[0] > 0 && taken[1] > 0 && taken[2] > 0, 1, "all sources taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
