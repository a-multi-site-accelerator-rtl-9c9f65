// Testbench for sc with small pages (8 words), 4-page blocks and small
// partitions, so that frames fill, pages are programmed, blocks are erased
// and both partitions wrap around within a short run. Signal samples and
// hashes arrive at random; the testbench keeps the word each NVM address
// should hold (last write wins after a wrap) and reads every written word
// back through the controller's read port. The NVM model flags a program
// without erase. A final phase feeds data faster than the slow NVM can take
// it and checks that the overflow counter moves.
module tb_sc;
  import hull_pkg::*;
  localparam int PW = 8, BP = 4, SFP = 2, HFP = 1, PAW = 8;
  localparam int SP = 12, HB = 12, HP = 8;
  localparam int WAW = PAW + $clog2(PW);
  logic clk = 0, rst_n = 0;
  logic ce = 1;
  logic sig_valid = 0, sig_ready, hash_valid = 0, hash_ready;
  item_t sig_item, hash_item;
  logic rd_req = 0, rd_ack, rd_rvalid;
  logic [WAW-1:0] rd_addr;
  logic [63:0] rd_data;
  logic nvm_cmd_valid, nvm_cmd_ready, nvm_wvalid, nvm_wready, nvm_rvalid;
  logic [1:0] nvm_cmd;
  logic [WAW-1:0] nvm_addr;
  logic [63:0] nvm_wdata, nvm_rdata;
  logic [PAW-1:0] sig_next, hash_next;
  logic [15:0] sig_wraps, hash_wraps;
  logic [31:0] n_prog, n_erase, ovf;
  int m_prog, m_erase, m_read, m_err;
  int tprog = 30;
  int checks = 0, failures = 0;
  logic [63:0] expw [longint];      // address -> word, frames that completed
  logic [63:0] pend_s [longint], pend_h [longint];
  always #5 clk = ~clk;

  sc #(.PAGE_W(PW), .BLK_PAGES(BP), .SIG_FP(SFP), .HASH_FP(HFP), .PA_W(PAW), .SIG_BASE('0),
       .SIG_PAGES(PAW'(SP)), .HASH_BASE(PAW'(HB)), .HASH_PAGES(PAW'(HP))) dut (
      .clk, .rst_n, .ce, .sig_valid, .sig_ready, .sig_item, .hash_valid, .hash_ready, .hash_item,
      .rd_req, .rd_ack, .rd_addr, .rd_rvalid, .rd_data,
      .nvm_cmd_valid, .nvm_cmd_ready, .nvm_cmd, .nvm_addr, .nvm_wvalid, .nvm_wready, .nvm_wdata,
      .nvm_rvalid, .nvm_rdata, .sig_next, .hash_next, .sig_wraps, .hash_wraps, .n_prog, .n_erase, .ovf);

  nvm_model #(.PAGE_W(PW), .BLK_PAGES(BP), .WA_W(WAW), .T_PROG(30), .T_ERASE(60), .T_READ(3)) nvm (
      .clk, .rst_n, .cmd_valid(nvm_cmd_valid), .cmd_ready(nvm_cmd_ready), .cmd(nvm_cmd), .addr(nvm_addr),
      .wvalid(nvm_wvalid), .wready(nvm_wready), .wdata(nvm_wdata), .rvalid(nvm_rvalid), .rdata(nvm_rdata),
      .n_prog(m_prog), .n_erase(m_erase), .n_read(m_read), .errors(m_err));

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h exp %0h", what, got, exp); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a frame reaches the NVM; the start of a block erases the whole block
  task automatic commit(input logic [63:0] pend [longint]);
    foreach (pend[a])
      if ((a / PW) % BP == 0 && a % PW == 0)
        for (longint b = a; b < a + BP * PW; b++) if (expw.exists(b)) expw.delete(b);
    foreach (pend[a]) expw[a] = pend[a];
  endtask

  initial begin
    int ns, nh, sw, hw, gap;
    logic [63:0] sacc, hacc;
    ns = 0; nh = 0; sw = 0; hw = 0; sacc = 0; hacc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: a data rate the NVM can follow
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      sig_valid = ($urandom_range(9) == 0);
      hash_valid = ($urandom_range(9) == 0);
      sig_item = '0; sig_item.data = $urandom; sig_item.chan = 7'($urandom);
      hash_item = '0; hash_item.data = $urandom;
      if (sig_valid) begin
        sacc = {sacc[47:0], sig_item.data[15:0]};
        ns++;
        if (ns % 4 == 0) begin
          // word sw goes to page (sw / PW) of the partition, if its frame completes
          pend_s[longint'(((sw / PW) % SP) * PW + sw % PW)] = sacc;
          sw++;
          if (sw % (SFP * PW) == 0) begin
            commit(pend_s);
            pend_s.delete();
          end
        end
      end
      if (hash_valid) begin
        hacc = {hacc[55:0], hash_item.data[7:0]};
        nh++;
        if (nh % 8 == 0) begin
          pend_h[longint'((HB + (hw / PW) % HP) * PW + hw % PW)] = hacc;
          hw++;
          if (hw % (HFP * PW) == 0) begin
            commit(pend_h);
            pend_h.delete();
          end
        end
      end
    end
    @(negedge clk); sig_valid = 0; hash_valid = 0;
    repeat (2000) @(posedge clk);
    check(ovf, 0, "no overflow at a sustainable rate");
    check(sig_wraps > 0 && hash_wraps > 0, 1, "both partitions wrapped");
    check(n_erase, m_erase, "erase count");
    check(n_prog, m_prog, "program count");
    check(n_prog, (sw / (SFP * PW)) * SFP + (hw / (HFP * PW)) * HFP, "pages programmed");
    check(m_err, 0, "NVM rule violations");
    // read every expected word back
    foreach (expw[a]) begin
      @(negedge clk); rd_req = 1; rd_addr = WAW'(a);
      while (!rd_ack) @(negedge clk);
      @(negedge clk); rd_req = 0;
      while (!rd_rvalid) @(posedge clk);
      #1 check(rd_data, expw[a], $sformatf("word at %0d", a));
    end
    // phase 2: more than the NVM can take
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      sig_valid = 1;
      hash_valid = 1;
    end
    @(negedge clk); sig_valid = 0; hash_valid = 0;
    check(ovf > 0, 1, "overflow counted");
    repeat (3000) @(posedge clk);
    check(m_err, 0, "NVM rule violations after overflow");
    $display("programs=%0d erases=%0d reads=%0d overflow=%0d", m_prog, m_erase, m_read, ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
