// Testbench for dcomp: random hash batches are encoded by the testbench into
// the compressed byte format (N-1, D-1, frequency-sorted dictionary, then per
// run an index and an Elias-gamma run length, zero padded to a byte). The
// bytes are fed to dcomp back to back, batch after batch, and every decoded
// hash, its position and the last flag are compared with the original batch.
// With no output stall a batch must finish within one cycle per bit field
// and per hash plus a small margin.
module tb_dcomp;
  import hull_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  logic [15:0] expq [$];     // {last, position, hash}
  logic bp = 1;
  always #5 clk = ~clk;

  dcomp dut (.clk, .rst_n, .ce, .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [15:0] e;
    e = expq.pop_front();
    check(out_item.data, 32'(e[7:0]), "hash");
    check(out_item.chan, 7'(e[14:8]), "position");
    check(out_item.last, e[15], "last");
  end
  always @(posedge clk) out_ready <= bp ? ($urandom_range(3) != 0) : 1'b1;

  bit bits [$];
  task automatic put(input int v, input int len);
    for (int b = len - 1; b >= 0; b--) bits.push_back(v[b]);
  endtask

  initial begin
    item_t items [$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 60; b++) begin
      int n, k, d, ib, t0, run, cur;
      logic [7:0] h [96];
      int cnt [256];
      int first [256];
      int order [$];
      int rnk [256];
      bit done_v [256];
      order.delete(); items.delete(); bits.delete();
      bp = (b % 3 != 0);
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
      // item stream as hfreq emits it
      begin
        item_t it;
        it = '0; it.tag = TAG_C; it.data = {16'(n), 16'(d)}; items.push_back(it);
        foreach (order[r]) begin it = '0; it.tag = TAG_B; it.data = 32'(order[r]); items.push_back(it); end
        for (int i = 0; i < n; i++) begin
          it = '0; it.tag = TAG_A; it.chan = CHAN_W'(i); it.data = 32'(rnk[h[i]]); it.last = (i == n - 1);
          items.push_back(it);
        end
      end
      // reference bit stream
      ib = 0;
      while ((1 << ib) < d) ib++;
      put(n - 1, 8); put(d - 1, 8);
      foreach (order[r]) put(order[r], 8);
      run = 0; cur = -1;
      for (int i = 0; i <= n; i++) begin
        if (i < n && rnk[h[i]] == cur) run++;
        else begin
          if (run > 0) begin
            int l;
            l = 0;
            while ((2 << l) <= run) l++;
            put(cur, ib);
            put(run, 2 * l + 1);
          end
          if (i < n) begin cur = rnk[h[i]]; run = 1; end
        end
      end
      while (bits.size() % 8 != 0) bits.push_back(1'b0);
      items.delete();
      for (int i = 0; i < bits.size(); i += 8) begin
        item_t it;
        it = '0;
        for (int j = 0; j < 8; j++) it.data[7 - j] = bits[i + j];
        it.last = (i + 8 == bits.size());
        items.push_back(it);
      end
      for (int i = 0; i < n; i++) expq.push_back({(i == n - 1), 7'(i), h[i]});
      t0 = $time / 10;
      foreach (items[i]) begin
        in_item = items[i];
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      while (expq.size() != 0) @(posedge clk);
      if (!bp) begin
        checks++;
        if ($time / 10 - t0 > bits.size() + n + 16) begin
          failures++;
          $display("FAIL batch time: %0d cycles for %0d bits, %0d hashes", $time / 10 - t0, bits.size(), n);
        end
      end
    end
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
