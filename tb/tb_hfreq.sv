// Testbench for hfreq: random batches of hashes with skewed value
// distributions (few distinct values, long runs, or all distinct). The
// expected header, frequency-sorted dictionary (ties by first appearance) and
// index stream are computed by the testbench; the cycles from the last hash
// of a batch to the last index out are checked against nb*(D+1)+nb+D plus a
// small margin for back-pressure-free runs.
module tb_hfreq;
  import hull_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic [7:0] nb;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  logic [33:0] expq [$];     // {tag, last, data[7:0] or N/D} packed below
  int t_last_in, t_last_out;
  logic bp = 1;
  always #5 clk = ~clk;

  hfreq #(.BATCH(96)) dut (.clk, .rst_n, .ce, .nb, .in_valid, .in_ready, .in_item,
      .out_valid, .out_ready, .out_item);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [33:0] e;
    e = expq.pop_front();
    check(out_item.tag, e[33:32], "tag");
    check(out_item.data, (out_item.tag == TAG_A) ? 32'(e[7:0]) : e[31:0], "data");
    if (out_item.tag == TAG_A) check(out_item.chan, 7'(e[31:24]), "chan");
    if (out_item.last) t_last_out = $time / 10;
  end
  always @(posedge clk) out_ready <= bp ? ($urandom_range(3) != 0) : 1'b1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      int n, k, d;
      logic [7:0] h [96];
      int cnt [256];
      int first [256];
      int order [$];
      int rnk [256];
      bit done_v [256];
      bp = (b % 3 != 0);
      order.delete();
      n = (b < 4) ? 96 : $urandom_range(96, 1);
      k = $urandom_range(4);
      for (int i = 0; i < 256; i++) begin cnt[i] = 0; first[i] = -1; done_v[i] = 0; end
      for (int i = 0; i < n; i++) begin
        case (k)
          0: h[i] = 8'($urandom_range(3));
          1: h[i] = (i > 0 && $urandom_range(3) != 0) ? h[i-1] : 8'($urandom);
          2: h[i] = 8'(i * 7 + b);
          3: h[i] = 8'd42;
          default: h[i] = 8'($urandom_range(20) + 100);
        endcase
        if (cnt[h[i]] == 0) first[h[i]] = i;
        cnt[h[i]]++;
      end
      d = 0;
      for (int v = 0; v < 256; v++) if (cnt[v] > 0) d++;
      // selection by count, ties by first appearance
      for (int r = 0; r < d; r++) begin
        int bv;
        bv = -1;
        for (int v = 0; v < 256; v++)
          if (cnt[v] > 0 && !done_v[v])
            if (bv < 0 || cnt[v] > cnt[bv] || (cnt[v] == cnt[bv] && first[v] < first[bv])) bv = v;
        done_v[bv] = 1;
        rnk[bv] = r;
        order.push_back(bv);
      end
      nb = 8'(n);
      expq.push_back({TAG_C, 16'(n), 16'(d)});
      foreach (order[r]) expq.push_back({TAG_B, 24'd0, 8'(order[r])});
      for (int i = 0; i < n; i++) expq.push_back({TAG_A, 8'(i % 128), 16'd0, 8'(rnk[h[i]])});
      for (int i = 0; i < n; i++) begin
        in_item = '0;
        in_item.chan = CHAN_W'(i);
        in_item.data = 32'(h[i]);
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      t_last_in = $time / 10;
      while (expq.size() != 0) @(posedge clk);
      if (!bp) begin
        checks++;
        if (t_last_out - t_last_in > n * (d + 1) + n + d + 8) begin
          failures++;
          $display("FAIL batch time %0d cycles for n=%0d d=%0d", t_last_out - t_last_in, n, d);
        end
      end
    end
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
