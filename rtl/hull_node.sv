// hull_node: the processing fabric of one implant node. Samples from the
// electrode ADC, packets from the intra-body radio and configuration writes
// from the node's microcontroller come in; radio packets, NVM commands,
// query read data and the selected-electrode list go out.
//
// Structure (every PE has its own clock divider, so it runs at f_clk/k):
//   switch A  (sources: ADC samples, signal samples received over the radio)
//             -> HCONV, FFT, NEO, XCOR, BBF, DWT, GATE data, DTW
//   switch B  (sources: FFT, NEO, XCOR, BBF, DWT, SVM)
//             -> SVM feature ports 0..2, THR, NPACK (SVM partials),
//                feature output to the microcontroller
//   THR -> GATE condition;  GATE -> switch D -> SC signal input, NPACK (signal)
//   HCONV -> switch E -> EMDH, NGRAM (the two second hash stages)
//   switch C (sources: EMDH, NGRAM, DCOMP)
//             -> HFREQ, CCHECK local, CCHECK received, SC hash input
//   HFREQ -> HCOMP -> NPACK (hash);  CCHECK -> CSEL -> sel_* output
//   radio rx -> UNPACK -> by packet kind: hash -> DCOMP, SVM -> SVM partial
//             port, signal -> switch A
//   three NPACKs -> packet arbiter -> TDMA gate -> radio tx
//   SC <-> NVM port; DTW -> dtw_* output
// Switch routes, PE settings and clock divisors live in 32 configuration
// registers (cfg_regs); register 29 and 30 writes also load an SVM weight and
// a TDMA slot owner. Reset values give the default seizure-propagation
// pipeline: ADC -> HCONV -> EMDH -> HFREQ -> HCOMP -> radio and to CCHECK,
// ADC -> FFT -> SVM -> THR -> GATE -> SC, with hashes stored as well.
// Register map (bit fields low to high):
//   0-4   clock divisors, 8 bits per PE: NEO DWT FFT XCOR | BBF SVM THR GATE |
//         HCONV NGRAM EMDH HFREQ | HCOMP NPACK UNPACK DCOMP | CCHECK CSEL DTW SC
//   5-7   switch A routes, 8 bits per destination {en, sel[2:0], tag mask[3:0]}
//   8-9   switch B routes;  10 switch C routes;  31 switch D (bytes 0-1) and
//         switch E (bytes 2-3) routes
//   11 NEO threshold          12 FFT {step, bin_base, pshift}
//   13 XCOR {ref_ch, step, shift}   14 BBF {b0, b1}  15 BBF {b2, a1}
//   16 BBF {a2, mode, step, eshift}
//   17 SVM {mode, port_en[2:0], base0, base1, base2, wshift, -, n_part}
//   18 {SVM n_elec, THR invert, -, GATE hold}   19 SVM bias   20 THR threshold
//   21 HCONV {win, step, seed}   22 NGRAM {n_len, blk}   23 NGRAM seed
//   24 EMDH {a, shift}   25 EMDH b
//   26 {HFREQ batch, DTW band, DTW sq, node id}
//   27 NPACK {hash dst, SVM dst, signal dst, flow}
//   28 TDMA {slot length, guard}
//   29 SVM weight write {data[15:0], addr[31:16]}   30 TDMA owner {id, -, slot}
// The PEs, the switches, the per-PE clock divider and the TDMA radio follow
// the paper; the register map, the switch sizes and the fixed links listed
// above are this design's.
// Lint notes: some internal signals are left unused on purpose and show up
// as unused-signal warnings: the GATE drop pulse, CCHECK full, the NPACK
// sent pulses, the TDMA slot number, the UNPACK status pulses and most
// header fields (only the packet kind is used for routing), the unused
// tag/last bits of the CSEL and DTW items, the unused bytes of registers
// 7 and 29-31 that are decoded elsewhere, and the SVM0 port index constant.
module hull_node
  import hull_pkg::*;
#(
  parameter int N_CH      = N_ELEC,  // electrodes
  parameter int WIN_L     = WIN,     // FFT / XCOR window
  parameter int HC_WMAX   = WIN,     // longest HCONV window
  parameter int BATCH     = N_ELEC,  // hashes per HFREQ batch
  parameter int N_REG     = N_ELEC,  // CCHECK registers
  parameter int DTW_LMAX  = 64,
  parameter int PAGE_W    = PAGE_B / 8,
  parameter int BLK_PAGES = 256,
  parameter int PA_W      = 25,
  parameter logic [PA_W-1:0] SIG_PAGES  = PA_W'(31 * 1024 * 1024),
  parameter logic [PA_W-1:0] HASH_PAGES = PA_W'(1024 * 1024),
  localparam int WA_W     = PA_W + $clog2(PAGE_W)
) (
  input  logic            clk,
  input  logic            rst_n,
  // electrode samples
  input  logic            adc_valid,
  output logic            adc_ready,
  input  logic [6:0]      adc_chan,
  input  logic [15:0]     adc_data,
  input  logic [1:0]      adc_tag,
  input  logic            adc_last,
  // microcontroller configuration bus
  input  logic            cfg_we,
  input  logic [4:0]      cfg_addr,
  input  logic [31:0]     cfg_wdata,
  output logic [31:0]     cfg_rdata,
  // radio
  input  logic            rx_valid,
  output logic            rx_ready,
  input  logic [7:0]      rx_byte,
  input  logic            rx_last,
  output logic            tx_valid,
  input  logic            tx_ready,
  output logic [7:0]      tx_byte,
  output logic            tx_last,
  input  logic            tdma_sync,
  input  logic [31:0]     now,
  // NVM
  output logic            nvm_cmd_valid,
  input  logic            nvm_cmd_ready,
  output logic [1:0]      nvm_cmd,
  output logic [WA_W-1:0] nvm_addr,
  output logic            nvm_wvalid,
  input  logic            nvm_wready,
  output logic [63:0]     nvm_wdata,
  input  logic            nvm_rvalid,
  input  logic [63:0]     nvm_rdata,
  // query reads
  input  logic            rd_req,
  output logic            rd_ack,
  input  logic [WA_W-1:0] rd_addr,
  output logic            rd_rvalid,
  output logic [63:0]     rd_data,
  // results for the microcontroller
  output logic            sel_valid,
  output logic [6:0]      sel_chan,
  output logic            sel_last,
  output logic            sel_empty,
  output logic            feat_valid,
  output logic [31:0]     feat_data,
  output logic [6:0]      feat_chan,
  output logic            dtw_valid,
  output logic [31:0]     dtw_dist,
  output logic            det_valid,
  output logic [6:0]      det_chan,
  output logic            det_flag,
  // storage metadata (next page of each partition, wrap counts, NVM
  // program/erase counts, items lost to a full SRAM buffer)
  output logic [PA_W-1:0] sc_sig_next,
  output logic [PA_W-1:0] sc_hash_next,
  output logic [15:0]     sc_sig_wraps,
  output logic [15:0]     sc_hash_wraps,
  output logic [31:0]     sc_n_prog,
  output logic [31:0]     sc_n_erase,
  output logic [31:0]     sc_ovf
);
  // ------------------------------------------------------------ config
  localparam logic [31:0][31:0] CFG_RESET = {
    32'h008F_008F,                  // 31 switch D: gate -> SC; switch E: HCONV -> EMDH
    32'h0000_0000,                  // 30 TDMA owner write
    32'h0000_0000,                  // 29 SVM weight write
    32'h0040_0100,                  // 28 slot 256 cycles, guard 64
    32'h0000_FFFF,                  // 27 all packets broadcast, flow 0
    32'h0000_0460,                  // 26 batch 96, band 4, node 0
    32'h0000_0000,                  // 25 EMDH b
    32'h0000_0001,                  // 24 EMDH a = 1, shift 0
    32'h1234_5678,                  // 23 NGRAM seed
    32'h0000_7803,                  // 22 NGRAM n = 3, block 120
    32'hACE1_7878,                  // 21 HCONV win 120, step 120, seed
    32'h0000_0000,                  // 20 THR threshold 0
    32'h0000_0000,                  // 19 SVM bias
    32'h0010_0060,                  // 18 n_elec 96, gate hold 16
    32'h0000_0002,                  // 17 SVM mode 0, port 0 on
    32'h0003_7800,                  // 16 BBF energy mode, step 120
    32'h0000_0000,                  // 15
    32'h0000_4000,                  // 14 BBF b0 = 1.0
    32'h0006_7800,                  // 13 XCOR step 120, shift 6
    32'h0008_0078,                  // 12 FFT step 120, pshift 8
    32'h0000_1000,                  // 11 NEO threshold
    32'h0000_8F8F,                  // 10 switch C: EMDH -> HFREQ, EMDH -> CCHECK local
    32'h0000_0000,                  //  9 switch B: nothing to NPACK SVM / feature out
    32'hCF00_0000 | 32'h0000_008F,  //  8 switch B: FFT -> SVM0, SVM -> THR (tag A)
    32'h0000_0000,                  //  7 unused
    32'h8F00_0000,                  //  6 switch A: ADC -> GATE data
    32'h008F_008F,                  //  5 switch A: ADC -> HCONV, ADC -> FFT
    32'h0101_0101, 32'h0101_0101, 32'h0101_0101, 32'h0101_0101, 32'h0101_0101
  };
  logic [31:0][31:0] r;

  cfg_regs #(.N_REGS(32), .RESET(CFG_RESET)) u_cfg (.clk, .rst_n, .we(cfg_we), .addr(cfg_addr),
      .wdata(cfg_wdata), .rdata(cfg_rdata), .regs(r));

  // ------------------------------------------------------------ clock enables
  localparam int N_PE = 20;
  localparam int P_NEO = 0, P_DWT = 1, P_FFT = 2, P_XCOR = 3, P_BBF = 4, P_SVM = 5, P_THR = 6,
                 P_GATE = 7, P_HCONV = 8, P_NGRAM = 9, P_EMDH = 10, P_HFREQ = 11, P_HCOMP = 12,
                 P_NPACK = 13, P_UNPACK = 14, P_DCOMP = 15, P_CCHECK = 16, P_CSEL = 17,
                 P_DTW = 18, P_SC = 19;
  logic [N_PE-1:0] ce;
  for (genvar p = 0; p < N_PE; p++) begin : g_div
    clk_div #(.K_W(8)) u_div (.clk, .rst_n, .k(r[p / 4][8 * (p % 4) +: 8]), .ce(ce[p]));
  end

  // ------------------------------------------------------------ switch A
  localparam int A_IN = 2, A_OUT = 8;
  localparam int A_HCONV = 0, A_DTW = 1, A_FFT = 2, A_NEO = 3, A_XCOR = 4, A_BBF = 5,
                 A_DWT = 6, A_GATE = 7;
  logic [A_IN-1:0]  a_iv, a_ir;
  item_t [A_IN-1:0] a_ii;
  logic [A_OUT-1:0] a_ov, a_or;
  item_t [A_OUT-1:0] a_oi;
  logic [A_OUT-1:0][0:0] a_sel;
  logic [A_OUT-1:0] a_en;
  logic [A_OUT-1:0][3:0] a_mask;
  for (genvar d = 0; d < A_OUT; d++) begin : g_a_cfg
    assign a_en[d]   = r[5 + d / 4][8 * (d % 4) + 7];
    assign a_sel[d]  = r[5 + d / 4][8 * (d % 4) + 4];
    assign a_mask[d] = r[5 + d / 4][8 * (d % 4) +: 4];
  end
  pe_switch #(.N_IN(A_IN), .N_OUT(A_OUT)) u_sw_a (.clk, .rst_n, .sel(a_sel), .en(a_en), .mask(a_mask),
      .in_valid(a_iv), .in_ready(a_ir), .in_item(a_ii), .out_valid(a_ov), .out_ready(a_or), .out_item(a_oi));

  assign a_iv[0] = adc_valid;
  assign adc_ready = a_ir[0];
  always_comb begin
    a_ii[0] = '0;
    a_ii[0].data = 32'(signed'(adc_data));
    a_ii[0].chan = adc_chan;
    a_ii[0].tag  = adc_tag;
    a_ii[0].last = adc_last;
  end

  // ------------------------------------------------------------ feature PEs
  localparam int B_IN = 6, B_OUT = 7;
  localparam int B_FFT = 0, B_NEO = 1, B_XCOR = 2, B_BBF = 3, B_DWT = 4, B_SVM = 5;
  localparam int BO_SVM0 = 0, BO_THR = 3, BO_NPK = 4, BO_FEAT = 5, BO_SPARE = 6;
  logic [B_IN-1:0]  b_iv, b_ir;
  item_t [B_IN-1:0] b_ii;
  logic [B_OUT-1:0] b_ov, b_or;
  item_t [B_OUT-1:0] b_oi;
  logic [B_OUT-1:0][2:0] b_sel;
  logic [B_OUT-1:0] b_en;
  logic [B_OUT-1:0][3:0] b_mask;
  for (genvar d = 0; d < B_OUT; d++) begin : g_b_cfg
    assign b_en[d]   = r[8 + d / 4][8 * (d % 4) + 7];
    assign b_sel[d]  = r[8 + d / 4][8 * (d % 4) + 4 +: 3];
    assign b_mask[d] = r[8 + d / 4][8 * (d % 4) +: 4];
  end
  pe_switch #(.N_IN(B_IN), .N_OUT(B_OUT)) u_sw_b (.clk, .rst_n, .sel(b_sel), .en(b_en), .mask(b_mask),
      .in_valid(b_iv), .in_ready(b_ir), .in_item(b_ii), .out_valid(b_ov), .out_ready(b_or), .out_item(b_oi));

  neo #(.N_CH(N_CH)) u_neo (.clk, .rst_n, .ce(ce[P_NEO]), .thr(r[11]),
      .in_valid(a_ov[A_NEO]), .in_ready(a_or[A_NEO]), .in_item(a_oi[A_NEO]),
      .out_valid(b_iv[B_NEO]), .out_ready(b_ir[B_NEO]), .out_item(b_ii[B_NEO]));
  dwt #(.N_CH(N_CH)) u_dwt (.clk, .rst_n, .ce(ce[P_DWT]),
      .in_valid(a_ov[A_DWT]), .in_ready(a_or[A_DWT]), .in_item(a_oi[A_DWT]),
      .out_valid(b_iv[B_DWT]), .out_ready(b_ir[B_DWT]), .out_item(b_ii[B_DWT]));
  fft #(.N_CH(N_CH), .WIN_L(WIN_L)) u_fft (.clk, .rst_n, .ce(ce[P_FFT]),
      .step(r[12][7:0]), .bin_base(r[12][14:8]), .pshift(r[12][20:16]),
      .in_valid(a_ov[A_FFT]), .in_ready(a_or[A_FFT]), .in_item(a_oi[A_FFT]),
      .out_valid(b_iv[B_FFT]), .out_ready(b_ir[B_FFT]), .out_item(b_ii[B_FFT]));
  xcor #(.N_CH(N_CH), .WIN_L(WIN_L)) u_xcor (.clk, .rst_n, .ce(ce[P_XCOR]),
      .ref_ch(r[13][6:0]), .step(r[13][15:8]), .shift(r[13][20:16]),
      .in_valid(a_ov[A_XCOR]), .in_ready(a_or[A_XCOR]), .in_item(a_oi[A_XCOR]),
      .out_valid(b_iv[B_XCOR]), .out_ready(b_ir[B_XCOR]), .out_item(b_ii[B_XCOR]));
  bbf #(.N_CH(N_CH)) u_bbf (.clk, .rst_n, .ce(ce[P_BBF]),
      .b0(r[14][15:0]), .b1(r[14][31:16]), .b2(r[15][15:0]), .a1(r[15][31:16]), .a2(r[16][15:0]),
      .mode(r[16][16]), .step(r[16][31:24]), .eshift(r[16][21:17]),
      .in_valid(a_ov[A_BBF]), .in_ready(a_or[A_BBF]), .in_item(a_oi[A_BBF]),
      .out_valid(b_iv[B_BBF]), .out_ready(b_ir[B_BBF]), .out_item(b_ii[B_BBF]));

  // ------------------------------------------------------------ SVM
  logic       part_valid, part_ready;
  item_t      part_item;
  logic [3:0] svm_base [3];
  assign svm_base[0] = r[17][7:4];
  assign svm_base[1] = r[17][11:8];
  assign svm_base[2] = r[17][15:12];
  svm #(.N_CH(N_CH), .FPC(16), .NIN(3)) u_svm (.clk, .rst_n, .ce(ce[P_SVM]),
      .mode(r[17][0]), .port_en(r[17][3:1]), .base(svm_base), .bias(r[19]), .wshift(r[17][20:16]),
      .n_elec(r[18][7:0]), .n_part(r[17][31:24]),
      .w_we(cfg_we && cfg_addr == 5'd29), .w_addr(cfg_wdata[16 +: bits_for(N_CH * 16)]),
      .w_data(cfg_wdata[15:0]),
      .in_valid(b_ov[2:0]), .in_ready(b_or[2:0]), .in_item(b_oi[2:0]),
      .part_valid, .part_ready, .part_item,
      .out_valid(b_iv[B_SVM]), .out_ready(b_ir[B_SVM]), .out_item(b_ii[B_SVM]));

  // ------------------------------------------------------------ THR, GATE
  logic  thr_valid, thr_ready;
  item_t thr_item;
  thr u_thr (.clk, .rst_n, .ce(ce[P_THR]), .threshold(r[20]), .invert(r[18][8]),
      .in_valid(b_ov[BO_THR]), .in_ready(b_or[BO_THR]), .in_item(b_oi[BO_THR]),
      .out_valid(thr_valid), .out_ready(thr_ready), .out_item(thr_item));
  // detections are visible to the microcontroller as well
  assign det_valid = thr_valid && thr_ready;
  assign det_chan  = thr_item.chan;
  assign det_flag  = thr_item.data[0];

  logic  g_valid, g_ready, g_dropped;
  item_t g_item;
  gate #(.N_CH(N_CH)) u_gate (.clk, .rst_n, .ce(ce[P_GATE]), .hold(r[18][31:16]),
      .cond_valid(thr_valid), .cond_ready(thr_ready), .cond_item(thr_item),
      .in_valid(a_ov[A_GATE]), .in_ready(a_or[A_GATE]), .in_item(a_oi[A_GATE]),
      .out_valid(g_valid), .out_ready(g_ready), .out_item(g_item), .dropped(g_dropped));

  // switch D: gated samples to storage and to the signal packer
  logic [1:0]  d_ov, d_or;
  item_t [1:0] d_oi;
  logic [1:0][0:0] d_sel;
  logic [1:0][3:0] d_mask;
  logic [1:0]  d_en;
  for (genvar d = 0; d < 2; d++) begin : g_d_cfg
    assign d_en[d]   = r[31][8 * d + 7];
    assign d_sel[d]  = 1'b0;
    assign d_mask[d] = r[31][8 * d +: 4];
  end
  pe_switch #(.N_IN(1), .N_OUT(2)) u_sw_d (.clk, .rst_n, .sel(d_sel), .en(d_en), .mask(d_mask),
      .in_valid(g_valid), .in_ready(g_ready), .in_item(g_item),
      .out_valid(d_ov), .out_ready(d_or), .out_item(d_oi));

  // ------------------------------------------------------------ hash PEs
  localparam int C_IN = 3, C_OUT = 4;
  localparam int C_EMDH = 0, C_NGRAM = 1, C_DCOMP = 2;
  localparam int CO_HFREQ = 0, CO_LOCAL = 1, CO_RECV = 2, CO_SC = 3;
  logic [C_IN-1:0]  c_iv, c_ir;
  item_t [C_IN-1:0] c_ii;
  logic [C_OUT-1:0] c_ov, c_or;
  item_t [C_OUT-1:0] c_oi;
  logic [C_OUT-1:0][1:0] c_sel;
  logic [C_OUT-1:0] c_en;
  logic [C_OUT-1:0][3:0] c_mask;
  for (genvar d = 0; d < C_OUT; d++) begin : g_c_cfg
    assign c_en[d]   = r[10][8 * d + 7];
    assign c_sel[d]  = r[10][8 * d + 4 +: 2];
    assign c_mask[d] = r[10][8 * d +: 4];
  end
  pe_switch #(.N_IN(C_IN), .N_OUT(C_OUT)) u_sw_c (.clk, .rst_n, .sel(c_sel), .en(c_en), .mask(c_mask),
      .in_valid(c_iv), .in_ready(c_ir), .in_item(c_ii), .out_valid(c_ov), .out_ready(c_or), .out_item(c_oi));

  logic  hc_valid, hc_ready;
  item_t hc_item;
  hconv #(.N_CH(N_CH), .WMAX(HC_WMAX)) u_hconv (.clk, .rst_n, .ce(ce[P_HCONV]),
      .win(r[21][7:0]), .step(r[21][15:8]), .seed(r[21][31:16]),
      .in_valid(a_ov[A_HCONV]), .in_ready(a_or[A_HCONV]), .in_item(a_oi[A_HCONV]),
      .out_valid(hc_valid), .out_ready(hc_ready), .out_item(hc_item));

  // switch E: HCONV dot products to EMDH and/or NGRAM
  logic [1:0]  e_ov, e_or;
  item_t [1:0] e_oi;
  logic [1:0][0:0] e_sel;
  logic [1:0][3:0] e_mask;
  logic [1:0]  e_en;
  for (genvar d = 0; d < 2; d++) begin : g_e_cfg
    assign e_en[d]   = r[31][16 + 8 * d + 7];
    assign e_sel[d]  = 1'b0;
    assign e_mask[d] = r[31][16 + 8 * d +: 4];
  end
  pe_switch #(.N_IN(1), .N_OUT(2)) u_sw_e (.clk, .rst_n, .sel(e_sel), .en(e_en), .mask(e_mask),
      .in_valid(hc_valid), .in_ready(hc_ready), .in_item(hc_item),
      .out_valid(e_ov), .out_ready(e_or), .out_item(e_oi));

  emdh u_emdh (.clk, .rst_n, .ce(ce[P_EMDH]), .a(r[24][15:0]), .b(r[25]), .shift(r[24][20:16]),
      .in_valid(e_ov[0]), .in_ready(e_or[0]), .in_item(e_oi[0]),
      .out_valid(c_iv[C_EMDH]), .out_ready(c_ir[C_EMDH]), .out_item(c_ii[C_EMDH]));
  ngram #(.N_CH(N_CH)) u_ngram (.clk, .rst_n, .ce(ce[P_NGRAM]),
      .n_len(r[22][2:0]), .blk(r[22][15:8]), .seed(r[23]),
      .in_valid(e_ov[1]), .in_ready(e_or[1]), .in_item(e_oi[1]),
      .out_valid(c_iv[C_NGRAM]), .out_ready(c_ir[C_NGRAM]), .out_item(c_ii[C_NGRAM]));

  logic  hf_valid, hf_ready, hcp_valid, hcp_ready;
  item_t hf_item, hcp_item;
  hfreq #(.BATCH(BATCH)) u_hfreq (.clk, .rst_n, .ce(ce[P_HFREQ]), .nb(r[26][7:0]),
      .in_valid(c_ov[CO_HFREQ]), .in_ready(c_or[CO_HFREQ]), .in_item(c_oi[CO_HFREQ]),
      .out_valid(hf_valid), .out_ready(hf_ready), .out_item(hf_item));
  hcomp u_hcomp (.clk, .rst_n, .ce(ce[P_HCOMP]),
      .in_valid(hf_valid), .in_ready(hf_ready), .in_item(hf_item),
      .out_valid(hcp_valid), .out_ready(hcp_ready), .out_item(hcp_item));

  logic  cc_valid, cc_ready, cc_full;
  item_t cc_item;
  ccheck #(.N_REG(N_REG)) u_ccheck (.clk, .rst_n, .ce(ce[P_CCHECK]),
      .r_valid(c_ov[CO_RECV]), .r_ready(c_or[CO_RECV]), .r_item(c_oi[CO_RECV]),
      .q_valid(c_ov[CO_LOCAL]), .q_ready(c_or[CO_LOCAL]), .q_item(c_oi[CO_LOCAL]),
      .out_valid(cc_valid), .out_ready(cc_ready), .out_item(cc_item), .full(cc_full));
  item_t cs_item;
  csel #(.N_CH(N_CH)) u_csel (.clk, .rst_n, .ce(ce[P_CSEL]),
      .in_valid(cc_valid), .in_ready(cc_ready), .in_item(cc_item),
      .out_valid(sel_valid), .out_ready(1'b1), .out_item(cs_item));
  assign sel_chan  = cs_item.chan;
  assign sel_last  = cs_item.last;
  assign sel_empty = (cs_item.tag == TAG_C);

  // ------------------------------------------------------------ feature / DTW outputs
  assign feat_valid = b_ov[BO_FEAT];
  assign feat_data  = b_oi[BO_FEAT].data;
  assign feat_chan  = b_oi[BO_FEAT].chan;
  assign b_or[BO_FEAT]  = 1'b1;
  assign b_or[BO_SPARE] = 1'b1;

  item_t dtw_item;
  dtw #(.LMAX(DTW_LMAX)) u_dtw (.clk, .rst_n, .ce(ce[P_DTW]), .band(r[26][14:8]), .sq(r[26][15]),
      .in_valid(a_ov[A_DTW]), .in_ready(a_or[A_DTW]), .in_item(a_oi[A_DTW]),
      .out_valid(dtw_valid), .out_ready(1'b1), .out_item(dtw_item));
  assign dtw_dist = dtw_item.data;

  // ------------------------------------------------------------ packers
  logic [2:0]  pk_valid, pk_ready, pk_sent;
  item_t [2:0] pk_item;
  npack u_npack_h (.clk, .rst_n, .ce(ce[P_NPACK]), .dst(r[27][7:0]), .src(r[26][23:16]),
      .kind(PKT_HASH), .flow(r[27][31:24]), .now,
      .in_valid(hcp_valid), .in_ready(hcp_ready), .in_item(hcp_item),
      .out_valid(pk_valid[0]), .out_ready(pk_ready[0]), .out_item(pk_item[0]), .pkt_sent(pk_sent[0]));
  npack u_npack_s (.clk, .rst_n, .ce(ce[P_NPACK]), .dst(r[27][15:8]), .src(r[26][23:16]),
      .kind(PKT_SVM), .flow(r[27][31:24]), .now,
      .in_valid(b_ov[BO_NPK]), .in_ready(b_or[BO_NPK]), .in_item(b_oi[BO_NPK]),
      .out_valid(pk_valid[1]), .out_ready(pk_ready[1]), .out_item(pk_item[1]), .pkt_sent(pk_sent[1]));
  npack u_npack_g (.clk, .rst_n, .ce(ce[P_NPACK]), .dst(r[27][23:16]), .src(r[26][23:16]),
      .kind(PKT_SIGNAL), .flow(r[27][31:24]), .now,
      .in_valid(d_ov[1]), .in_ready(d_or[1]), .in_item(d_oi[1]),
      .out_valid(pk_valid[2]), .out_ready(pk_ready[2]), .out_item(pk_item[2]), .pkt_sent(pk_sent[2]));

  // packet arbiter: round robin between whole packets, a packet only starts
  // while this node owns the TDMA slot
  logic       grant;
  logic [3:0] slot;
  logic       busy;
  logic [1:0] cur, rr;
  tdma_ctrl #(.N_SLOTS(16), .SLOT_W(16)) u_tdma (.clk, .rst_n, .slot_len(r[28][15:0]), .guard(r[28][31:16]),
      .my_id(r[26][23:16]), .own_we(cfg_we && cfg_addr == 5'd30), .own_addr(cfg_wdata[3:0]),
      .own_id(cfg_wdata[31:24]), .sync(tdma_sync), .grant, .slot);

  logic [1:0] pick;
  logic       any;
  always_comb begin
    pick = rr;
    any  = 1'b0;
    for (int j = 2; j >= 0; j--) begin
      logic [1:0] c;
      c = 2'((int'(rr) + j) % 3);
      if (pk_valid[c]) begin pick = c; any = 1'b1; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; rr <= '0;
    end else if (!busy) begin
      if (any && grant) begin busy <= 1'b1; cur <= pick; end
    end else if (tx_valid && tx_ready && tx_last) begin
      busy <= 1'b0;
      rr <= (cur == 2'd2) ? 2'd0 : cur + 1'b1;
    end
  end

  assign tx_valid = busy && pk_valid[cur];
  assign tx_byte  = pk_item[cur].data[7:0];
  assign tx_last  = pk_item[cur].last;
  for (genvar j = 0; j < 3; j++) begin : g_pk_ready
    assign pk_ready[j] = busy && (cur == 2'(j)) && tx_ready;
  end

  // ------------------------------------------------------------ receive side
  item_t    rx_item, up_item;
  logic     up_valid, up_ready, up_err, up_ok, up_bad, up_drop;
  pkt_hdr_t up_hdr;
  always_comb begin
    rx_item = '0;
    rx_item.data = 32'(rx_byte);
    rx_item.last = rx_last;
  end
  unpack u_unpack (.clk, .rst_n, .ce(ce[P_UNPACK]),
      .in_valid(rx_valid), .in_ready(rx_ready), .in_item(rx_item),
      .out_valid(up_valid), .out_ready(up_ready), .out_item(up_item), .out_err(up_err),
      .hdr_out(up_hdr), .pkt_ok(up_ok), .pkt_err(up_bad), .pkt_drop(up_drop));

  // by packet kind: compressed hashes, SVM partial sums, signal samples
  logic  dc_in_ready;
  logic  is_hash, is_svm;
  assign is_hash = (up_hdr.kind == PKT_HASH);
  assign is_svm  = (up_hdr.kind == PKT_SVM);
  assign part_valid = up_valid && is_svm;
  assign part_item  = up_item;
  assign a_iv[1]    = up_valid && !is_hash && !is_svm;
  assign a_ii[1]    = up_item;
  assign up_ready   = is_hash ? dc_in_ready : is_svm ? part_ready : a_ir[1];

  dcomp u_dcomp (.clk, .rst_n, .ce(ce[P_DCOMP]),
      .in_valid(up_valid && is_hash), .in_ready(dc_in_ready), .in_item(up_item),
      .out_valid(c_iv[C_DCOMP]), .out_ready(c_ir[C_DCOMP]), .out_item(c_ii[C_DCOMP]));

  // ------------------------------------------------------------ storage
  sc #(.PAGE_W(PAGE_W), .BLK_PAGES(BLK_PAGES), .PA_W(PA_W), .SIG_BASE('0), .SIG_PAGES(SIG_PAGES),
       .HASH_BASE(SIG_PAGES), .HASH_PAGES(HASH_PAGES)) u_sc (
      .clk, .rst_n, .ce(ce[P_SC]),
      .sig_valid(d_ov[0]), .sig_ready(d_or[0]), .sig_item(d_oi[0]),
      .hash_valid(c_ov[CO_SC]), .hash_ready(c_or[CO_SC]), .hash_item(c_oi[CO_SC]),
      .rd_req, .rd_ack, .rd_addr, .rd_rvalid, .rd_data,
      .nvm_cmd_valid, .nvm_cmd_ready, .nvm_cmd, .nvm_addr, .nvm_wvalid, .nvm_wready, .nvm_wdata,
      .nvm_rvalid, .nvm_rdata,
      .sig_next(sc_sig_next), .hash_next(sc_hash_next), .sig_wraps(sc_sig_wraps),
      .hash_wraps(sc_hash_wraps), .n_prog(sc_n_prog), .n_erase(sc_n_erase), .ovf(sc_ovf));
endmodule
