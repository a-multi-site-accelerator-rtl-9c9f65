// Testbench for dtw: random pairs of sequences (lengths 1..LMAX, sometimes a
// shifted copy of each other) with random band widths and both cost
// functions. The expected distance comes from a full dynamic-programming
// matrix in the testbench. The computation must take na*nb cycles plus a
// small constant once both sequences are in.
module tb_dtw;
  import hull_pkg::*;
  localparam int LM = 24;
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic [6:0] band;
  logic sq;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  item_t in_item, out_item;
  int checks = 0, failures = 0;
  longint expq [$];
  int t_out;
  always #5 clk = ~clk;

  dtw #(.LMAX(LM)) dut (.clk, .rst_n, .ce, .band, .sq, .in_valid, .in_ready, .in_item, .out_valid, .out_ready, .out_item);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(out_item.data, expq.pop_front(), "distance");
    t_out = $time / 10;
  end

  task automatic send(input int v, input logic [1:0] tag, input bit lst);
    in_item = '0;
    in_item.data = 32'(v);
    in_item.tag = tag;
    in_item.last = lst;
    @(negedge clk); in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int na, nb, w, t0;
      int a [LM], b [LM];
      longint D [LM][LM];
      longint INF;
      INF = 64'h3_FFFF_FFFF;
      na = $urandom_range(LM, 1);
      nb = (t % 2 == 0) ? na : $urandom_range(LM, 1);
      w = (t % 4 == 0) ? LM : $urandom_range(LM, 1);
      band = 7'(w);
      sq = (t % 3 == 0);
      for (int i = 0; i < na; i++) a[i] = int'($urandom_range(4000)) - 2000;
      for (int j = 0; j < nb; j++) b[j] = (t % 2 == 0 && j > 0) ? a[j - 1] + int'($urandom_range(20)) - 10 : int'($urandom_range(4000)) - 2000;
      for (int i = 0; i < na; i++)
        for (int j = 0; j < nb; j++) begin
          longint c, best;
          c = (a[i] > b[j]) ? a[i] - b[j] : b[j] - a[i];
          if (sq) c = c * c;
          if (i == 0 && j == 0) best = 0;
          else begin
            best = INF;
            if (i > 0 && D[i-1][j] < best) best = D[i-1][j];
            if (j > 0 && D[i][j-1] < best) best = D[i][j-1];
            if (i > 0 && j > 0 && D[i-1][j-1] < best) best = D[i-1][j-1];
          end
          if (i - j >= w || j - i >= w || best == INF) D[i][j] = INF;
          else D[i][j] = best + c;
        end
      expq.push_back(D[na-1][nb-1] > 64'hFFFFFFFF ? 64'hFFFFFFFF : D[na-1][nb-1]);
      for (int i = 0; i < na; i++) send(a[i], TAG_A, i == na - 1);
      for (int j = 0; j < nb; j++) send(b[j], TAG_B, j == nb - 1);
      t0 = $time / 10;
      while (expq.size() != 0) @(posedge clk);
      check((t_out - t0) <= na * nb + 4, 1, "cycles");
    end
    repeat (20) @(posedge clk);
    check(expq.size(), 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
