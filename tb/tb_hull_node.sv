// End-to-end testbench: two nodes at reduced size (4 electrodes, 16-sample
// windows, 8-word NVM pages) joined by a radio channel model, each with its
// own NVM model. The microcontroller role is played by the testbench, which
// programs both nodes over the configuration bus:
//   node 0: ADC -> HCONV -> EMDH -> HFREQ/HCOMP -> radio, EMDH -> CCHECK and
//           SC; ADC -> FFT -> SVM -> THR -> GATE -> SC and -> radio (signal);
//           SVM leader in the second phase.
//   node 1: the same hash path plus NGRAM (hashes stored), signal packets
//           from node 0 through DWT to the feature output, SVM non-leader in
//           the second phase; DTW in the third phase.
// Both nodes see the same electrode signals plus a little noise, so their
// hashes collide. The channel flips one bit in some frames. Each mechanism
// is counted and must have happened; the end checks are: damaged hash frames
// dropped and damaged signal/SVM frames kept with err, the NVM models saw no
// rule violation, and a query read returns what the NVM holds.
module tb_hull_node;
  import hull_pkg::*;
  localparam int NCH = 4, PW = 8, BP = 4, PAW = 8;
  localparam int WAW = PAW + $clog2(PW);
  localparam int NM = 18;
  localparam string MNAME [NM] = '{"adc stall", "clock divider idle", "gate pass", "gate drop",
      "hash packet dropped on CRC", "signal/SVM packet kept on CRC", "TDMA slot wait",
      "NVM page program", "NVM block erase", "SVM partial sent", "SVM leader sum",
      "hash collision", "empty selection", "DTW result", "NGRAM hash", "remote signal feature",
      "query read", "switch broadcast stall"};
  int mcount [NM];

  logic clk = 0, rst_n = 0;
  logic [31:0] now = 0;
  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  // per-node signals
  logic        adc_valid [2], adc_ready [2], adc_last [2];
  logic [6:0]  adc_chan [2];
  logic [15:0] adc_data [2];
  logic [1:0]  adc_tag [2];
  logic        cfg_we [2];
  logic [4:0]  cfg_addr [2];
  logic [31:0] cfg_wdata [2], cfg_rdata [2];
  logic        rx_valid [2], rx_ready [2], rx_last [2], tx_valid [2], tx_ready [2], tx_last [2];
  logic [7:0]  rx_byte [2], tx_byte [2];
  logic        nvm_cmd_valid [2], nvm_cmd_ready [2], nvm_wvalid [2], nvm_wready [2], nvm_rvalid [2];
  logic [1:0]  nvm_cmd [2];
  logic [WAW-1:0] nvm_addr [2], rd_addr [2];
  logic [63:0] nvm_wdata [2], nvm_rdata [2], rd_data [2];
  logic        rd_req [2], rd_ack [2], rd_rvalid [2];
  logic        sel_valid [2], sel_last [2], sel_empty [2], feat_valid [2], dtw_valid [2], det_valid [2], det_flag [2];
  logic [6:0]  sel_chan [2], feat_chan [2], det_chan [2];
  logic [31:0] feat_data [2], dtw_dist [2];
  int m_prog [2], m_erase [2], m_read [2], m_err [2];

  int checks = 0, failures = 0;
  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  for (genvar n = 0; n < 2; n++) begin : g_node
    hull_node #(.N_CH(NCH), .WIN_L(16), .HC_WMAX(16), .BATCH(NCH), .N_REG(8), .DTW_LMAX(8),
                .PAGE_W(PW), .BLK_PAGES(BP), .PA_W(PAW), .SIG_PAGES(PAW'(12)), .HASH_PAGES(PAW'(8))) dut (
      .clk, .rst_n,
      .adc_valid(adc_valid[n]), .adc_ready(adc_ready[n]), .adc_chan(adc_chan[n]), .adc_data(adc_data[n]),
      .adc_tag(adc_tag[n]), .adc_last(adc_last[n]),
      .cfg_we(cfg_we[n]), .cfg_addr(cfg_addr[n]), .cfg_wdata(cfg_wdata[n]), .cfg_rdata(cfg_rdata[n]),
      .rx_valid(rx_valid[n]), .rx_ready(rx_ready[n]), .rx_byte(rx_byte[n]), .rx_last(rx_last[n]),
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_byte(tx_byte[n]), .tx_last(tx_last[n]),
      .tdma_sync(1'b0), .now,
      .nvm_cmd_valid(nvm_cmd_valid[n]), .nvm_cmd_ready(nvm_cmd_ready[n]), .nvm_cmd(nvm_cmd[n]),
      .nvm_addr(nvm_addr[n]), .nvm_wvalid(nvm_wvalid[n]), .nvm_wready(nvm_wready[n]),
      .nvm_wdata(nvm_wdata[n]), .nvm_rvalid(nvm_rvalid[n]), .nvm_rdata(nvm_rdata[n]),
      .rd_req(rd_req[n]), .rd_ack(rd_ack[n]), .rd_addr(rd_addr[n]), .rd_rvalid(rd_rvalid[n]), .rd_data(rd_data[n]),
      .sel_valid(sel_valid[n]), .sel_chan(sel_chan[n]), .sel_last(sel_last[n]), .sel_empty(sel_empty[n]),
      .feat_valid(feat_valid[n]), .feat_data(feat_data[n]), .feat_chan(feat_chan[n]),
      .dtw_valid(dtw_valid[n]), .dtw_dist(dtw_dist[n]),
      .det_valid(det_valid[n]), .det_chan(det_chan[n]), .det_flag(det_flag[n]));
    nvm_model #(.PAGE_W(PW), .BLK_PAGES(BP), .WA_W(WAW), .T_PROG(40), .T_ERASE(90), .T_READ(3)) nvm (
      .clk, .rst_n, .cmd_valid(nvm_cmd_valid[n]), .cmd_ready(nvm_cmd_ready[n]), .cmd(nvm_cmd[n]),
      .addr(nvm_addr[n]), .wvalid(nvm_wvalid[n]), .wready(nvm_wready[n]), .wdata(nvm_wdata[n]),
      .rvalid(nvm_rvalid[n]), .rdata(nvm_rdata[n]), .n_prog(m_prog[n]), .n_erase(m_erase[n]),
      .n_read(m_read[n]), .errors(m_err[n]));
  end

  // ---------------------------------------------------------------- radio channel
  // node n's transmitter feeds node 1-n's receiver; some frames get one bit
  // flipped in byte 15 (first payload byte or data CRC), which damages the
  // data but not the header
  int  fpos [2];
  bit  flip [2];
  logic [3:0] fkind [2];
  int  dmg_hash [2], dmg_other [2];    // damaged frames received by node 1-n
  int  frames [2];
  int up_drop [2], up_err [2];
  for (genvar n = 0; n < 2; n++) begin : g_ch
    assign rx_valid[1 - n] = tx_valid[n];
    assign tx_ready[n]     = rx_ready[1 - n];
    assign rx_byte[1 - n]  = tx_byte[n] ^ ((flip[n] && fpos[n] == 15) ? 8'h10 : 8'h00);
    assign rx_last[1 - n]  = tx_last[n];
    always @(posedge clk) if (rst_n && tx_valid[n] && tx_ready[n]) begin
      if (fpos[n] == 2) fkind[n] = tx_byte[n][7:4];
      if (fpos[n] == 15 && flip[n]) begin
        if (fkind[n] == PKT_HASH) dmg_hash[n]++; else dmg_other[n]++;
      end
      if (tx_last[n]) begin
        fpos[n] = 0;
        frames[n]++;
        flip[n] = ($urandom_range(5) == 0);
      end else fpos[n]++;
    end
  end

  // ---------------------------------------------------------------- counters
  // counted per node inside the generate loop (hierarchical names need a
  // constant index); mc[n][i] is summed into mcount at the end
  int mc [2][NM];
  for (genvar n = 0; n < 2; n++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      if (adc_valid[n] && !adc_ready[n]) mc[n][0]++;
      if (g_node[n].dut.g_valid && g_node[n].dut.g_ready) mc[n][2]++;
      if (g_node[n].dut.g_dropped) mc[n][3]++;
      if (g_node[n].dut.up_drop) up_drop[n]++;
      if (g_node[n].dut.up_bad) up_err[n]++;
      if (!g_node[n].dut.grant && g_node[n].dut.pk_valid != '0 && !g_node[n].dut.busy) mc[n][6]++;
      if (sel_valid[n] && !sel_empty[n]) mc[n][11]++;
      if (sel_valid[n] && sel_empty[n]) mc[n][12]++;
      if (dtw_valid[n]) mc[n][13]++;
      if (rd_rvalid[n]) mc[n][16]++;
      if (g_node[n].dut.a_iv[0] && !g_node[n].dut.a_ir[0] && g_node[n].dut.a_ov != '0) mc[n][17]++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (!g_node[0].dut.ce[8]) mc[0][1]++;
    if (g_node[1].dut.pk_sent[1]) mc[1][9]++;
    if (g_node[1].dut.c_iv[1] && g_node[1].dut.c_ir[1]) mc[1][14]++;
    if (feat_valid[1]) mc[1][15]++;
    if (g_node[0].dut.b_iv[5] && g_node[0].dut.b_ir[5] && g_node[0].dut.r[17][0]) mc[0][10]++;
  end

  // ---------------------------------------------------------------- stimulus
  task automatic cfg(input int n, input int a, input logic [31:0] d);
    @(negedge clk);
    cfg_we[n] = 1; cfg_addr[n] = 5'(a); cfg_wdata[n] = d;
    @(negedge clk);
    cfg_we[n] = 0;
  endtask

  // one time step: a sample of every electrode on both nodes
  int ph_t;
  task automatic time_step(input int t, input logic [1:0] tag1);
    fork
      for (int n = 0; n < 2; n++) begin
        automatic int nn = n;
        fork
          for (int e = 0; e < NCH; e++) begin
            int base;
            base = int'(2000.0 * $sin(0.3 * t + e)) + ((t / 40) % 2) * 1500 * ((e % 2) ? 1 : -1);
            @(negedge clk);
            adc_valid[nn] = 1;
            adc_chan[nn] = 7'(e);
            adc_data[nn] = 16'(base + ((e == 3) ? int'($urandom_range(600)) - 300 : 0));
            adc_tag[nn] = (nn == 1) ? tag1 : TAG_A;
            adc_last[nn] = (e == NCH - 1);
            #1;
            while (!adc_ready[nn]) begin @(negedge clk); #1; end
            @(posedge clk); #1 adc_valid[nn] = 0;
          end
        join_none
      end
      wait fork;
    join
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NM; i++) begin mcount[i] = 0; mc[0][i] = 0; mc[1][i] = 0; end
    for (int n = 0; n < 2; n++) begin
      adc_valid[n] = 0; adc_last[n] = 0; adc_tag[n] = 0; adc_chan[n] = 0; adc_data[n] = 0;
      cfg_we[n] = 0; cfg_addr[n] = 0; cfg_wdata[n] = 0; rd_req[n] = 0; rd_addr[n] = 0;
      fpos[n] = 0; flip[n] = 0; frames[n] = 0; dmg_hash[n] = 0; dmg_other[n] = 0; up_drop[n] = 0; up_err[n] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- configuration (the microcontroller's job)
    for (int n = 0; n < 2; n++) begin
      cfg(n, 2, 32'h0101_0100 | ((n == 0) ? 32'h2 : 32'h1));    // node 0: HCONV at f/2
      cfg(n, 5, 32'h8181_0081);                                  // ADC -> HCONV, FFT, NEO
      cfg(n, 6, (n == 0) ? 32'h8100_8181 : 32'h8191_0081);      // XCOR, BBF (node 0), DWT <- radio (node 1), GATE
      cfg(n, 8, 32'hD1AF_9F8F);                                  // FFT, NEO, XCOR -> SVM; SVM tag A -> THR
      cfg(n, 9, (n == 0) ? 32'h0000_BFD8 : 32'h0000_CFD8);      // SVM tag D -> NPACK; BBF/DWT -> feature out
      cfg(n, 10, (n == 0) ? 32'h8FAF_8F8F : 32'h9FAF_8F8F);     // EMDH -> HFREQ, CCHECK; DCOMP -> CCHECK; SC hashes
      cfg(n, 31, (n == 0) ? 32'h008F_8F8F : 32'h8F8F_008F);     // GATE -> SC (+ radio on node 0); HCONV -> EMDH (+ NGRAM on node 1)
      cfg(n, 12, 32'h0008_0010);                                 // FFT step 16, pshift 8
      cfg(n, 13, 32'h0006_1000);                                 // XCOR step 16
      cfg(n, 14, 32'h0000_4000);                                 // BBF b0 = 1
      cfg(n, 16, 32'h1006_0000);                                 // BBF energy over 16
      cfg(n, 17, 32'h0008_0002);                                 // SVM mode 0, FFT port only
      cfg(n, 18, 32'h0004_0004);                                 // 4 electrodes, gate hold 4
      cfg(n, 19, 32'h0000_0000);
      cfg(n, 20, 32'h0000_0000);
      cfg(n, 21, 32'hACE1_1010);                                 // HCONV window 16, step 16
      cfg(n, 22, 32'h0000_1003);                                 // NGRAM 3-grams, blocks of 16
      cfg(n, 26, 32'h0000_0404 | (32'(n) << 16));               // batch 4, DTW band 4, node id
      cfg(n, 28, 32'h0040_0100);                                 // slots of 256 cycles, guard 64
      for (int s = 0; s < 16; s++) cfg(n, 30, {8'(s / 8), 20'd0, 4'(s)});
      for (int w = 0; w < NCH * 16; w++) cfg(n, 29, {16'(w), 16'(int'($urandom_range(2000)) - 1000)});
    end
    // ---- phase 1: detection per electrode
    for (int t = 0; t < 160; t++) begin time_step(t, TAG_A); repeat (60) @(posedge clk); end
    // ---- phase 2: mode switch to the hierarchical classifier
    cfg(0, 17, 32'h0108_0003);   // leader, one partial expected
    cfg(1, 17, 32'h0008_0003);   // non-leader
    for (int t = 160; t < 260; t++) begin time_step(t, TAG_A); repeat (60) @(posedge clk); end
    // ---- phase 3: template matching on node 1 (DTW gets tags A and B)
    cfg(1, 5, 32'h8181_8381);
    for (int t = 260; t < 270; t++) begin time_step(t, (t >= 266) ? TAG_B : TAG_A); repeat (60) @(posedge clk); end
    repeat (3000) @(posedge clk);
    // ---- a query read of stored data on node 0
    begin
      logic [63:0] exp_w;
      @(negedge clk); rd_req[0] = 1; rd_addr[0] = WAW'(3);
      while (!rd_ack[0]) @(negedge clk);
      @(negedge clk); rd_req[0] = 0;
      while (!rd_rvalid[0]) @(posedge clk);
      exp_w = g_node[0].nvm.rd(3);
      #1 check(rd_data[0], exp_w, "query read");
    end
    for (int i = 0; i < NM; i++) mcount[i] = mc[0][i] + mc[1][i];
    mcount[4] = up_drop[1] + up_drop[0];
    mcount[5] = up_err[1] + up_err[0];
    mcount[7] = m_prog[0] + m_prog[1];
    mcount[8] = m_erase[0] + m_erase[1];
    // ---- end checks
    check(up_drop[1], dmg_hash[0], "node 1 drops exactly the damaged hash frames");
    check(up_err[1], dmg_other[0], "node 1 keeps damaged signal frames with err");
    check(up_drop[0], dmg_hash[1], "node 0 drops exactly the damaged hash frames");
    check(up_err[0], dmg_other[1], "node 0 keeps damaged SVM frames with err");
    check(m_err[0] + m_err[1], 0, "NVM rules kept");
    for (int i = 0; i < NM; i++) begin
      $display("mechanism %-32s %0d", MNAME[i], mcount[i]);
      check(mcount[i] > 0, 1, MNAME[i]);
    end
    $display("frames sent %0d / %0d", frames[0], frames[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
