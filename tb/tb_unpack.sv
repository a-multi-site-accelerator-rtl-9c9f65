// Testbench for unpack: the testbench builds frames of the three packet kinds
// (header, header CRC-32, payload, data CRC-32, last on the final byte) and
// damages some of them: a flipped header bit, a flipped payload bit, a
// flipped CRC bit, a truncated frame or an extra byte. Expected behaviour:
// clean frames are forwarded; header damage, truncation and extra bytes drop
// the frame; payload damage drops hash packets and forwards the others with
// err set. Forwarded items, the status pulses and the one-byte-per-cycle
// reception rate are checked.
module tb_unpack;
  import hull_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_err;
  logic pkt_ok, pkt_err, pkt_drop;
  pkt_hdr_t hdr_out;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  logic [40:0] expq [$];          // {err, last, chan, data}
  int n_ok = 0, n_err = 0, n_drop = 0, e_ok = 0, e_err = 0, e_drop = 0;
  always #5 clk = ~clk;

  unpack dut (.clk, .rst_n, .ce, .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item,
      .out_err, .hdr_out, .pkt_ok, .pkt_err, .pkt_drop);

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

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      logic [40:0] e;
      e = expq.pop_front();
      check(out_item.data, e[31:0], "data");
      check(out_item.chan, e[38:32], "chan");
      check(out_item.last, e[39], "last");
      check(out_err, e[40], "err");
    end
    n_ok += int'(pkt_ok); n_err += int'(pkt_err); n_drop += int'(pkt_drop);
  end
  always @(posedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 300; f++) begin
      logic [7:0] fr [$];
      logic [7:0] pay [$];
      logic [7:0] hb [$];
      logic [3:0] kind;
      logic [87:0] h;
      logic [31:0] c;
      int bpi, n_it, dmg, t0;
      fr.delete(); pay.delete(); hb.delete();
      case ($urandom_range(2))
        0: kind = PKT_HASH;
        1: kind = PKT_SIGNAL;
        default: kind = PKT_SVM;
      endcase
      bpi = (kind == PKT_HASH) ? 1 : (kind == PKT_SIGNAL) ? 2 : 4;
      n_it = $urandom_range(237 / bpi, 1);
      for (int i = 0; i < n_it * bpi; i++) pay.push_back(8'($urandom));
      h = {8'h01, 8'($urandom), kind, 8'($urandom), 16'(f), $urandom, 8'(pay.size()), 4'd0};
      for (int j = 10; j >= 0; j--) hb.push_back(8'(h >> (8 * j)));
      foreach (hb[j]) fr.push_back(hb[j]);
      c = crc_bits(hb);
      for (int j = 0; j < 4; j++) fr.push_back(8'(c >> (8 * j)));
      foreach (pay[j]) fr.push_back(pay[j]);
      c = crc_bits(pay);
      for (int j = 0; j < 4; j++) fr.push_back(8'(c >> (8 * j)));
      dmg = (f < 10) ? 0 : $urandom_range(7);
      case (dmg)
        1: fr[$urandom_range(10)] ^= 8'(1 << $urandom_range(7));            // header bit
        2: fr[11 + $urandom_range(3)] ^= 8'(1 << $urandom_range(7));       // header CRC bit
        3: fr[15 + $urandom_range(pay.size() - 1)] ^= 8'(1 << $urandom_range(7)); // payload bit
        4: fr[fr.size() - 1 - $urandom_range(3)] ^= 8'(1 << $urandom_range(7));   // data CRC bit
        5: repeat ($urandom_range(fr.size() - 2, 1)) void'(fr.pop_back()); // truncated
        6: fr.push_back(8'($urandom));                                    // extra byte
        default: ;
      endcase
      if (dmg == 1 || dmg == 2 || dmg == 5 || dmg == 6 || ((dmg == 3 || dmg == 4) && kind == PKT_HASH)) e_drop++;
      else begin
        bit er;
        er = (dmg == 3 || dmg == 4);
        if (er) e_err++; else e_ok++;
        for (int i = 0; i < n_it; i++) begin
          logic [31:0] w;
          w = 0;
          for (int j = 0; j < bpi; j++) w = (w << 8) | 32'(fr[15 + i * bpi + j]);
          expq.push_back({er, (i == n_it - 1), 7'(i), w});
        end
      end
      t0 = $time / 10;
      foreach (fr[i]) begin
        in_item = '0;
        in_item.data = 32'(fr[i]);
        in_item.last = (i == fr.size() - 1);
        @(negedge clk); in_valid = 1;
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      check(($time / 10 - t0) <= fr.size() + 1, 1, "reception one byte per cycle");
      while (expq.size() != 0) @(posedge clk);
      repeat (2) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    check(n_ok, e_ok, "ok pulses");
    check(n_err, e_err, "err pulses");
    check(n_drop, e_drop, "drop pulses");
    $display("ok=%0d err=%0d drop=%0d", n_ok, n_err, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
