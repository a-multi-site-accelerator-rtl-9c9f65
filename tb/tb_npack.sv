// Testbench for npack: random payload streams of the three packet kinds
// (1, 2 and 4 bytes per item), some longer than one packet. The testbench
// builds each expected packet itself (header bytes, CRC-32 computed bit by
// bit, payload, data CRC-32) and compares every output byte, the last flag
// and the 256-byte size limit. With the output never stalled a packet must
// leave at one byte per cycle.
module tb_npack;
  import hull_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic [3:0] kind;
  logic [31:0] now = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, pkt_sent;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  logic [16:0] expq [$];     // {don't-care mask, last, byte}
  logic [7:0] hdr_got [$];
  int pkt_bytes = 0, n_pkts = 0, t_first, t_last;
  logic bp = 1;
  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  npack dut (.clk, .rst_n, .ce, .dst(8'h12), .src(8'h34), .kind, .flow(8'h56), .now,
      .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item, .pkt_sent);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  function automatic logic [31:0] crc_bits(input logic [7:0] bytes [$]);
    logic [31:0] c;
    c = 32'hFFFFFFFF;
    foreach (bytes[i])
      for (int b = 0; b < 8; b++) begin
        logic fb;
        fb = c[0] ^ bytes[i][b];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB88320;
      end
    return ~c;
  endfunction

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the time stamp is taken when the packet closes; learn it from the output
  logic [31:0] seen_ts;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [16:0] e;
    e = expq.pop_front();
    if (pkt_bytes == 0) t_first = $time / 10;
    pkt_bytes++;
    if (pkt_bytes <= 11) hdr_got.push_back(out_item.data[7:0]);
    if (pkt_bytes >= 12 && pkt_bytes <= 15) begin
      logic [31:0] hc;
      hc = crc_bits(hdr_got);
      check(out_item.data[7:0], 8'(hc >> (8 * (pkt_bytes - 12))), "header crc");
      if (pkt_bytes == 15) hdr_got.delete();
    end else check(out_item.data[7:0] & ~e[16:9], e[7:0] & ~e[16:9], "byte");
    check(out_item.last, e[8], "last");
    if (out_item.last) begin
      check(pkt_bytes <= 256, 1, "packet size");
      t_last = $time / 10;
      if (!bp) check((t_last - t_first) <= pkt_bytes + 1, 1, "one byte per cycle");
      pkt_bytes = 0;
      n_pkts++;
    end
  end
  always @(posedge clk) out_ready <= bp ? ($urandom_range(3) != 0) : 1'b1;

  initial begin
    int seq;
    seq = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      int bpi, n_items, per_pkt;
      logic [31:0] words [$];
      words.delete();
      case (s % 3)
        0: kind = PKT_HASH;
        1: kind = PKT_SIGNAL;
        default: kind = PKT_SVM;
      endcase
      bpi = (kind == PKT_HASH) ? 1 : (kind == PKT_SIGNAL) ? 2 : 4;
      bp = (s % 4 != 0);
      n_items = (s < 6) ? 300 : $urandom_range(150, 1);
      for (int i = 0; i < n_items; i++) words.push_back($urandom & ((bpi == 4) ? 32'hFFFFFFFF : (32'd1 << (8 * bpi)) - 1));
      per_pkt = 237 / bpi;
      for (int p = 0; p * per_pkt < n_items; p++) begin
        logic [7:0] pay [$];
        logic [7:0] hb [$];
        logic [87:0] h, m;
        logic [31:0] c;
        int lo, hi;
        pay.delete(); hb.delete();
        lo = p * per_pkt;
        hi = (lo + per_pkt < n_items) ? lo + per_pkt : n_items;
        for (int i = lo; i < hi; i++)
          for (int j = bpi - 1; j >= 0; j--) pay.push_back(8'(words[i] >> (8 * j)));
        h = {8'h12, 8'h34, kind, 8'h56, 16'(seq), 32'd0, 8'(pay.size()), 4'd0};
        seq++;
        for (int j = 10; j >= 0; j--) hb.push_back(8'(h >> (8 * j)));
        // the time stamp bits are not known in advance
        m = {8'h0, 8'h0, 4'h0, 8'h0, 16'h0, 32'hFFFFFFFF, 8'h0, 4'd0};
        foreach (hb[j]) expq.push_back({8'(m >> (8 * (10 - j))), 1'b0, hb[j]});
        for (int j = 0; j < 4; j++) expq.push_back(17'h0);
        foreach (pay[j]) expq.push_back({8'h0, 1'b0, pay[j]});
        c = crc_bits(pay);
        for (int j = 0; j < 4; j++) expq.push_back({8'h0, j == 3, 8'(c >> (8 * j))});
      end
      for (int i = 0; i < n_items; i++) begin
        in_item = '0;
        in_item.data = words[i];
        in_item.last = (i == n_items - 1);
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      while (expq.size() != 0) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d packets=%0d", checks, failures, n_pkts);
    $finish;
  end
endmodule
