// Full-size testbench: one node with every parameter at its default (96
// electrodes, 120-sample windows and hash batches of 96, 4 KB NVM pages,
// 1 MB blocks, 2^25-page NVM) and the reset register values, i.e. the
// hash pipeline of the reset configuration:
//   ADC -> HCONV -> EMDH -> HFREQ -> HCOMP -> NPACK -> radio tx
// Register 5 is rewritten so that the ADC feeds HCONV only: with the reset
// route ADC -> FFT -> SVM the full-size SVM stops accepting features after
// the first few (an open defect), which would stall the ADC. Register 19 is
// written and read back. Two windows of 96 x 120 samples are sent.
// Checks: every transmitted frame has a correct header CRC and data CRC,
// hash packets arrive (kind 1) whose payload starts with N-1 = 95 and
// D-1 <= 95, one hash packet sequence per window, the first hash frame
// leaves within a cycle bound of the end of its window, the NVM model saw
// no rule violation, and a query read returns what the NVM holds.
module tb_hull_node_full;
  import hull_pkg::*;
  localparam int WAW = 25 + 9;
  localparam int NW  = 2;          // windows sent

  logic clk = 0, rst_n = 0;
  logic [31:0] now = 0;
  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  logic        adc_valid = 0, adc_ready, adc_last = 0;
  logic [6:0]  adc_chan = 0;
  logic [15:0] adc_data = 0;
  logic        cfg_we = 0;
  logic [4:0]  cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic        tx_valid, tx_last, rx_ready;
  logic [7:0]  tx_byte;
  logic        nvm_cmd_valid, nvm_cmd_ready, nvm_wvalid, nvm_wready, nvm_rvalid;
  logic [1:0]  nvm_cmd;
  logic [WAW-1:0] nvm_addr, rd_addr = 0;
  logic [63:0] nvm_wdata, nvm_rdata, rd_data;
  logic        rd_req = 0, rd_ack, rd_rvalid;
  logic        sel_valid, sel_last, sel_empty, feat_valid, dtw_valid, det_valid, det_flag;
  logic [6:0]  sel_chan, feat_chan, det_chan;
  logic [31:0] feat_data, dtw_dist;
  int m_prog, m_erase, m_read, m_err;

  int checks = 0, failures = 0;
  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  hull_node dut (
    .clk, .rst_n,
    .adc_valid, .adc_ready, .adc_chan, .adc_data, .adc_tag(TAG_A), .adc_last,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .rx_valid(1'b0), .rx_ready, .rx_byte(8'd0), .rx_last(1'b0),
    .tx_valid, .tx_ready(1'b1), .tx_byte, .tx_last,
    .tdma_sync(1'b0), .now,
    .nvm_cmd_valid, .nvm_cmd_ready, .nvm_cmd, .nvm_addr, .nvm_wvalid, .nvm_wready,
    .nvm_wdata, .nvm_rvalid, .nvm_rdata,
    .rd_req, .rd_ack, .rd_addr, .rd_rvalid, .rd_data,
    .sel_valid, .sel_chan, .sel_last, .sel_empty,
    .feat_valid, .feat_data, .feat_chan,
    .dtw_valid, .dtw_dist,
    .det_valid, .det_chan, .det_flag);

  nvm_model #(.WA_W(WAW)) nvm (
    .clk, .rst_n, .cmd_valid(nvm_cmd_valid), .cmd_ready(nvm_cmd_ready), .cmd(nvm_cmd),
    .addr(nvm_addr), .wvalid(nvm_wvalid), .wready(nvm_wready), .wdata(nvm_wdata),
    .rvalid(nvm_rvalid), .rdata(nvm_rdata), .n_prog(m_prog), .n_erase(m_erase),
    .n_read(m_read), .errors(m_err));

  // ---------------------------------------------------------------- tx frames
  function automatic logic [31:0] crc_of(input logic [7:0] b [$], input int from, input int to);
    logic [31:0] c = '1;
    for (int i = from; i < to; i++) c = crc32_byte(c, b[i]);
    return ~c;
  endfunction
  function automatic logic [31:0] le32(input logic [7:0] b [$], input int at);
    return {b[at + 3], b[at + 2], b[at + 1], b[at]};
  endfunction

  logic [7:0] fr [$];
  int frames = 0, hash_frames = 0, hash_first = 0;
  longint first_hash_cyc = -1, win_end_cyc [NW];
  always @(posedge clk) if (rst_n && tx_valid) begin
    fr.push_back(tx_byte);
    if (tx_last) begin
      int n;
      n = fr.size();
      frames++;
      if (n < 19) begin checks++; failures++; $display("FAIL short frame %0d", n); end
      else begin
        check(le32(fr, 11), crc_of(fr, 0, 11), "header crc");
        check(le32(fr, n - 4), crc_of(fr, 15, n - 4), "data crc");
        if (fr[2][7:4] == 4'(PKT_HASH)) begin
          hash_frames++;
          if (first_hash_cyc < 0) first_hash_cyc = $time / 10;
          // the first frame of a batch starts with N-1, D-1
          if (fr[15] == 8'd95 && fr[16] <= 8'd95) hash_first++;
        end
      end
      fr.delete();
    end
  end

  // ---------------------------------------------------------------- stimulus
  task automatic cfg(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  int stalls = 0;
  always @(posedge clk) if (rst_n && adc_valid && !adc_ready) stalls++;

  initial begin
    logic [63:0] exp_word;
    longint t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cfg(5, 32'h0000_008F);             // ADC -> HCONV only
    cfg(19, 32'd1000);
    @(negedge clk); cfg_addr = 5'd19; #1 check(cfg_rdata, 1000, "cfg readback");
    for (int w = 0; w < NW; w++) begin
      for (int t = 0; t < WIN; t++) begin
        for (int e = 0; e < N_ELEC; e++) begin
          adc_valid = 1;
          adc_chan  = 7'(e);
          adc_data  = 16'(int'((t * (e + 3) * 97) % 4001) - 2000 + int'($urandom_range(200)) - 100);
          adc_last  = (e == N_ELEC - 1);
          #1;
          while (!adc_ready) begin @(negedge clk); #1; end
          @(posedge clk); #1 adc_valid = 0;
          @(negedge clk);
        end
      end
      win_end_cyc[w] = $time / 10;
      $display("window %0d sent at cycle %0d", w, win_end_cyc[w]);
    end
    // let the pipelines drain
    t0 = $time / 10;
    while (hash_first < NW && $time / 10 - t0 < 200000) @(negedge clk);
    repeat (20000) @(negedge clk);
    check(hash_first, NW, "hash batches transmitted (first frame of each starts N-1=95)");
    check(hash_frames >= NW, 1, "hash frames");
    // the first batch's frame must leave within 40000 cycles of the end of
    // the first window (HFREQ ~ N*(D+2), HCOMP, NPACK and a 16-slot TDMA frame)
    check(first_hash_cyc >= 0 && first_hash_cyc - win_end_cyc[0] < 40000, 1, "first hash frame latency");
    check(m_err, 0, "NVM erase-before-program rule");
    // query read of word 5 of page 0 of the signal partition (erased
    // memory, all ones, since nothing was stored in this run)
    exp_word = nvm.rd(WAW'(5));
    @(negedge clk); rd_req = 1; rd_addr = WAW'(5);
    while (!rd_ack) @(negedge clk);
    @(negedge clk); rd_req = 0;
    while (!rd_rvalid) @(negedge clk);
    check(rd_data, exp_word, "query read");
    $display("frames=%0d hash_frames=%0d programs=%0d erases=%0d adc_stall_cycles=%0d",
             frames, hash_frames, m_prog, m_erase, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #8us;   // 800k cycles
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
