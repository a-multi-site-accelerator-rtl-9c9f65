// Testbench for svm: random weights are loaded, then rounds of features for
// four electrodes arrive on the three ports concurrently (4 + 1 + 4 features
// per electrode, as FFT bins, BBF energy and XCOR lags would). Mode 0: every
// electrode's score (sum w*x >>> wshift) + bias is checked against the
// testbench's own sum. Mode 1 (leader): the node sum plus two partial sums
// received on the partial stream is checked.
module tb_svm;
  import hull_pkg::*;
  localparam int NCH = 4, FPC = 16, NIN = 3;
  localparam int LEN [NIN] = '{4, 1, 4};
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic mode = 0;
  logic [3:0] base [NIN];
  logic w_we = 0;
  logic [5:0] w_addr = '0;
  logic signed [15:0] w_data = '0;
  logic [NIN-1:0] in_valid = '0, in_ready;
  item_t [NIN-1:0] in_item;
  logic part_valid = 0, part_ready;
  item_t part_item;
  logic out_valid, out_ready = 1;
  item_t out_item;
  int checks = 0, failures = 0;
  longint w [NCH * FPC];
  longint expv [NCH];
  longint node_exp;
  int outs = 0;
  always #5 clk = ~clk;

  initial begin base[0] = 4'd0; base[1] = 4'd4; base[2] = 4'd5; end

  svm #(.N_CH(NCH), .FPC(FPC), .NIN(NIN)) dut (.clk, .rst_n, .ce, .mode, .port_en(3'b111), .base, .bias(32'hFFFF_FF00),
      .wshift(5'd2), .n_elec(8'(NCH)), .n_part(8'd2), .w_we, .w_addr, .w_data, .in_valid, .in_ready, .in_item,
      .part_valid, .part_ready, .part_item, .out_valid, .out_ready, .out_item);

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

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    outs++;
    if (!mode) check(longint'(signed'(out_item.data)), expv[out_item.chan], "electrode score");
    else begin check(longint'(signed'(out_item.data)), node_exp, "leader total"); end
  end

  task automatic send(int p, item_t it);
    @(negedge clk);
    in_item[p] = it;
    in_valid[p] = 1'b1;
    #1;  // in_ready depends on in_valid: let it settle
    while (!in_ready[p]) begin @(negedge clk); #1; end
    @(posedge clk); in_valid[p] <= 1'b0;
  endtask

  longint x [NIN][NCH][4];

  task automatic round();
    for (int ch = 0; ch < NCH; ch++) begin
      longint acc;
      acc = 0;
      for (int p = 0; p < NIN; p++)
        for (int k = 0; k < LEN[p]; k++) begin
          x[p][ch][k] = longint'($urandom_range(20000)) - 10000;
          acc += x[p][ch][k] * w[ch * FPC + int'(base[p]) + k];
        end
      expv[ch] = (acc >>> 2) - 256;
    end
    begin
      int k [NIN][NCH];
      int left;
      left = 0;
      for (int p = 0; p < NIN; p++) for (int ch = 0; ch < NCH; ch++) begin k[p][ch] = 0; left += LEN[p]; end
      // random interleaving of ports and electrodes, in order within a port
      while (left > 0) begin
        int p, ch;
        item_t it;
        p = $urandom_range(NIN - 1);
        ch = $urandom_range(NCH - 1);
        if (k[p][ch] < LEN[p]) begin
          it = '0;
          it.chan = CHAN_W'(ch);
          it.data = 32'(x[p][ch][k[p][ch]]);
          it.last = (k[p][ch] == LEN[p] - 1);
          k[p][ch]++;
          left--;
          send(p, it);
        end
      end
      repeat (3) @(posedge clk);
    end
  endtask

  initial begin
    for (int i = 0; i < NIN; i++) in_item[i] = '0;
    part_item = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NCH * FPC; i++) begin
      w[i] = longint'($urandom_range(2000)) - 1000;
      @(negedge clk); w_we = 1; w_addr = 6'(i); w_data = 16'(w[i]);
    end
    @(negedge clk); w_we = 0;
    for (int r = 0; r < 20; r++) round();
    repeat (10) @(posedge clk);
    check(outs, 20 * NCH, "electrode scores emitted");
    // leader mode: own node sum plus two partials
    mode = 1;
    for (int r = 0; r < 5; r++) begin
      longint p0, p1;
      round();
      p0 = longint'($urandom_range(100000)) - 50000;
      p1 = longint'($urandom_range(100000)) - 50000;
      node_exp = p0 + p1;
      for (int ch = 0; ch < NCH; ch++) node_exp += expv[ch];
      for (int k = 0; k < 2; k++) begin
        @(negedge clk);
        part_item = '0; part_item.tag = TAG_D; part_item.chan = CHAN_ALL;
        part_item.data = 32'(k == 0 ? p0 : p1);
        part_valid = 1;
        while (!part_ready) @(negedge clk);
        @(posedge clk); #1 part_valid = 0;
      end
      repeat (5) @(posedge clk);
    end
    check(outs, 20 * NCH + 5, "leader totals emitted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
