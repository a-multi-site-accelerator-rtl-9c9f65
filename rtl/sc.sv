// sc: storage controller. It buffers signal samples and hashes on chip and
// writes them to the node's NAND-type non-volatile memory (NVM) page by page,
// and serves 8-byte reads for queries.
//   Ingest (advances on ce): signal items (data[15:0]) are packed four to a
//   64-bit word, hash items (data[7:0]) eight to a word, in arrival order.
//   Words go to a 24 KB buffer split into two signal frames of SIG_FP pages
//   and two hash frames of HASH_FP pages (double buffering: one frame fills
//   while the other is written out). If both frames of a stream are full the
//   new data is dropped and "ovf" counts the lost items.
//   Write-out (full clock, paced by the NVM handshake): a full frame is
//   written to the next pages of the stream's NVM partition (signal pages
//   SIG_BASE.., hash pages HASH_BASE.., each wrapping around at its size).
//   Before the first page of an erase block (BLK_PAGES pages) is programmed
//   the block is erased. Hash frames go first as they are small.
//   Metadata: sig_next and hash_next give the next page to be written in
//   each partition (relative to its base), sig_wraps/hash_wraps count wraps,
//   n_prog and n_erase count NVM operations.
//   Reads: rd_req with a word (8-byte) address is forwarded to the NVM when
//   no write-out is in progress; rd_rvalid/rd_data return the word.
// NVM port: one command at a time (nvm_cmd: 0 read, 1 program, 2 erase)
// with a valid/ready handshake; the NVM holds cmd_ready low while busy. A
// program command is followed by PAGE_W words on nvm_w*; a read returns one
// word on nvm_rvalid/nvm_rdata. The 4 KB page, 1 MB block, 8-byte read
// granularity, 24 KB of buffer and erase-before-program follow the paper;
// the frame split, partition layout and arbitration are this design's.
module sc
  import hull_pkg::*;
#(
  parameter int PAGE_W    = PAGE_B / 8,          // 64-bit words per page
  parameter int BLK_PAGES = 256,                 // 1 MB erase block
  parameter int SIG_FP    = 2,                   // pages per signal frame
  parameter int HASH_FP   = 1,                   // pages per hash frame
  parameter int PA_W      = 25,                  // page address bits (128 GB)
  parameter logic [PA_W-1:0] SIG_BASE   = '0,
  parameter logic [PA_W-1:0] SIG_PAGES  = PA_W'(31 * 1024 * 1024),
  parameter logic [PA_W-1:0] HASH_BASE  = PA_W'(31 * 1024 * 1024),
  parameter logic [PA_W-1:0] HASH_PAGES = PA_W'(1024 * 1024),
  localparam int WA_W = PA_W + $clog2(PAGE_W)     // word address bits
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ce,
  input  logic            sig_valid,
  output logic            sig_ready,
  input  item_t           sig_item,
  input  logic            hash_valid,
  output logic            hash_ready,
  input  item_t           hash_item,
  input  logic            rd_req,
  output logic            rd_ack,
  input  logic [WA_W-1:0] rd_addr,
  output logic            rd_rvalid,
  output logic [63:0]     rd_data,
  output logic            nvm_cmd_valid,
  input  logic            nvm_cmd_ready,
  output logic [1:0]      nvm_cmd,
  output logic [WA_W-1:0] nvm_addr,
  output logic            nvm_wvalid,
  input  logic            nvm_wready,
  output logic [63:0]     nvm_wdata,
  input  logic            nvm_rvalid,
  input  logic [63:0]     nvm_rdata,
  output logic [PA_W-1:0] sig_next,
  output logic [PA_W-1:0] hash_next,
  output logic [15:0]     sig_wraps,
  output logic [15:0]     hash_wraps,
  output logic [31:0]     n_prog,
  output logic [31:0]     n_erase,
  output logic [31:0]     ovf
);
  localparam int SFW   = SIG_FP * PAGE_W;        // words per signal frame
  localparam int HFW   = HASH_FP * PAGE_W;
  localparam int MEM_W = 2 * SFW + 2 * HFW;      // 3072 words = 24 KB
  localparam int MA_W  = $clog2(MEM_W);
  localparam int PW_W  = $clog2(PAGE_W) + 1;
  localparam logic [1:0] C_READ = 2'd0, C_PROG = 2'd1, C_ERASE = 2'd2;

  logic [63:0] mem [MEM_W];

  // ---------------- ingest ----------------
  logic [63:0] s_acc, h_acc;
  logic [1:0]  s_lane;
  logic [2:0]  h_lane;
  logic [MA_W-1:0] s_wp, h_wp;          // word index inside the filling frame
  logic        s_f, h_f;                // frame being filled
  logic [1:0]  s_full, h_full;          // frame full, waiting for write-out
  logic        s_drop, h_drop;

  assign sig_ready  = ce;
  assign hash_ready = ce;
  assign s_drop = s_full[s_f];
  assign h_drop = h_full[h_f];

  // ---------------- write-out ----------------
  typedef enum logic [2:0] {IDLE, ERASE, PROG, DATA, NEXT, RCMD, RWAIT} wstate_e;
  wstate_e ws;
  logic        w_is_hash, w_f;
  logic [7:0]  w_pg;                     // page inside the frame
  logic [PW_W-1:0] w_i;                  // word inside the page
  logic [PA_W-1:0] w_page;               // absolute NVM page
  logic [MA_W-1:0] w_mem;

  assign w_mem = w_is_hash ? MA_W'(2 * SFW + int'(w_f) * HFW + int'(w_pg) * PAGE_W + int'(w_i))
                           : MA_W'(int'(w_f) * SFW + int'(w_pg) * PAGE_W + int'(w_i));
  assign nvm_wdata = mem[w_mem];
  assign nvm_wvalid = (ws == DATA);
  assign rd_ack = (ws == IDLE) && rd_req && s_full == '0 && h_full == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_acc <= '0; h_acc <= '0; s_lane <= '0; h_lane <= '0; s_wp <= '0; h_wp <= '0;
      s_f <= 1'b0; h_f <= 1'b0; s_full <= '0; h_full <= '0; ovf <= '0;
      ws <= IDLE; w_is_hash <= 1'b0; w_f <= 1'b0; w_pg <= '0; w_i <= '0; w_page <= '0;
      sig_next <= '0; hash_next <= '0; sig_wraps <= '0; hash_wraps <= '0;
      n_prog <= '0; n_erase <= '0;
      nvm_cmd_valid <= 1'b0; nvm_cmd <= C_READ; nvm_addr <= '0;
      rd_rvalid <= 1'b0; rd_data <= '0;
    end else begin
      logic [1:0] s_full_n, h_full_n;
      s_full_n = s_full;
      h_full_n = h_full;
      rd_rvalid <= 1'b0;

      // signal ingest
      if (sig_valid && sig_ready) begin
        if (s_drop) ovf <= ovf + 1'b1;
        else begin
          logic [63:0] a;
          a = {s_acc[47:0], sig_item.data[15:0]};
          s_acc  <= a;
          s_lane <= s_lane + 1'b1;
          if (s_lane == 2'd3) begin
            mem[MA_W'(int'(s_f) * SFW) + s_wp] <= a;
            if (int'(s_wp) == SFW - 1) begin
              s_wp <= '0;
              s_full_n[s_f] = 1'b1;
              s_f <= !s_f;
            end else s_wp <= s_wp + 1'b1;
          end
        end
      end
      // hash ingest
      if (hash_valid && hash_ready) begin
        if (h_drop) ovf <= ovf + 1'b1;
        else begin
          logic [63:0] a;
          a = {h_acc[55:0], hash_item.data[7:0]};
          h_acc  <= a;
          h_lane <= h_lane + 1'b1;
          if (h_lane == 3'd7) begin
            mem[MA_W'(2 * SFW + int'(h_f) * HFW) + h_wp] <= a;
            if (int'(h_wp) == HFW - 1) begin
              h_wp <= '0;
              h_full_n[h_f] = 1'b1;
              h_f <= !h_f;
            end else h_wp <= h_wp + 1'b1;
          end
        end
      end

      // write-out and reads
      case (ws)
        IDLE: begin
          if (h_full != '0) begin
            w_is_hash <= 1'b1;
            w_f  <= (h_full == 2'b11) ? h_f : !h_full[0];   // oldest full frame
            w_pg <= '0;
            w_page <= HASH_BASE + hash_next;
            ws <= ((hash_next % PA_W'(BLK_PAGES)) == '0) ? ERASE : PROG;
          end else if (s_full != '0) begin
            w_is_hash <= 1'b0;
            w_f  <= (s_full == 2'b11) ? s_f : !s_full[0];
            w_pg <= '0;
            w_page <= SIG_BASE + sig_next;
            ws <= ((sig_next % PA_W'(BLK_PAGES)) == '0) ? ERASE : PROG;
          end else if (rd_req) begin
            nvm_cmd_valid <= 1'b1;
            nvm_cmd  <= C_READ;
            nvm_addr <= rd_addr;
            ws <= RCMD;
          end
        end
        ERASE: begin
          if (!nvm_cmd_valid) begin
            nvm_cmd_valid <= 1'b1;
            nvm_cmd  <= C_ERASE;
            nvm_addr <= {w_page, (WA_W - PA_W)'(0)};
          end else if (nvm_cmd_ready) begin
            nvm_cmd_valid <= 1'b0;
            n_erase <= n_erase + 1'b1;
            ws <= PROG;
          end
        end
        PROG: begin
          if (!nvm_cmd_valid) begin
            nvm_cmd_valid <= 1'b1;
            nvm_cmd  <= C_PROG;
            nvm_addr <= {w_page, (WA_W - PA_W)'(0)};
          end else if (nvm_cmd_ready) begin
            nvm_cmd_valid <= 1'b0;
            w_i <= '0;
            ws <= DATA;
          end
        end
        DATA: if (nvm_wready) begin
          if (int'(w_i) == PAGE_W - 1) begin
            n_prog <= n_prog + 1'b1;
            ws <= NEXT;
          end else w_i <= w_i + 1'b1;
        end
        NEXT: begin
          // advance the partition pointer with wrap-around
          logic [PA_W-1:0] nx;
          if (w_is_hash) begin
            nx = (hash_next + 1'b1 == HASH_PAGES) ? '0 : hash_next + 1'b1;
            if (hash_next + 1'b1 == HASH_PAGES) hash_wraps <= hash_wraps + 1'b1;
            hash_next <= nx;
            w_page <= HASH_BASE + nx;
          end else begin
            nx = (sig_next + 1'b1 == SIG_PAGES) ? '0 : sig_next + 1'b1;
            if (sig_next + 1'b1 == SIG_PAGES) sig_wraps <= sig_wraps + 1'b1;
            sig_next <= nx;
            w_page <= SIG_BASE + nx;
          end
          if (int'(w_pg) + 1 == (w_is_hash ? HASH_FP : SIG_FP)) begin
            if (w_is_hash) h_full_n[w_f] = 1'b0;
            else s_full_n[w_f] = 1'b0;
            ws <= IDLE;
          end else begin
            w_pg <= w_pg + 1'b1;
            ws <= ((nx % PA_W'(BLK_PAGES)) == '0) ? ERASE : PROG;
          end
        end
        RCMD: if (nvm_cmd_ready) begin
          nvm_cmd_valid <= 1'b0;
          ws <= RWAIT;
        end
        RWAIT: if (nvm_rvalid) begin
          rd_rvalid <= 1'b1;
          rd_data   <= nvm_rdata;
          ws <= IDLE;
        end
        default: ws <= IDLE;
      endcase
      s_full <= s_full_n;
      h_full <= h_full_n;
    end
  end
endmodule
