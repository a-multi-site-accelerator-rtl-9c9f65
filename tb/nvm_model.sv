// nvm_model: behavioural model of the node's NAND-type non-volatile memory,
// for testbenches only. It speaks the storage controller's NVM port: one
// command at a time (0 read one 64-bit word, 1 program a page, 2 erase a
// block), cmd_ready low while busy. A program command is followed by PAGE_W
// words on the w* handshake, then the model is busy for T_PROG cycles; an
// erase is busy for T_ERASE cycles; a read answers after T_READ cycles.
// Storage is a sparse associative array of words. It flags, in "errors",
// programming a page that was not erased since it was last programmed and
// erasing at an address that is not the start of a block.
module nvm_model #(
  parameter int PAGE_W    = 512,
  parameter int BLK_PAGES = 256,
  parameter int WA_W      = 34,
  parameter int T_PROG    = 100,
  parameter int T_ERASE   = 400,
  parameter int T_READ    = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  logic [1:0]      cmd,
  input  logic [WA_W-1:0] addr,
  input  logic            wvalid,
  output logic            wready,
  input  logic [63:0]     wdata,
  output logic            rvalid,
  output logic [63:0]     rdata,
  output int              n_prog,
  output int              n_erase,
  output int              n_read,
  output int              errors
);
  logic [63:0] mem [longint];
  bit          dirty [longint];          // page programmed since last erase
  int          busy;
  int          wleft;
  longint      wbase;
  int          rcount;
  longint      raddr;

  assign cmd_ready = (busy == 0) && (wleft == 0) && (rcount == 0);
  assign wready    = (wleft > 0);

  function automatic logic [63:0] rd(input longint a);
    if (mem.exists(a)) return mem[a];
    return '1;                          // erased NAND reads as all ones
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; wleft <= 0; rcount <= 0; rvalid <= 1'b0; rdata <= '0;
      n_prog <= 0; n_erase <= 0; n_read <= 0; errors <= 0;
    end else begin
      rvalid <= 1'b0;
      if (busy > 0) busy <= busy - 1;
      if (rcount > 0) begin
        if (rcount == 1) begin rvalid <= 1'b1; rdata <= rd(raddr); end
        rcount <= rcount - 1;
      end
      if (wvalid && wready) begin
        mem[wbase + longint'(PAGE_W - wleft)] = wdata;
        if (wleft == 1) busy <= T_PROG;
        wleft <= wleft - 1;
      end
      if (cmd_valid && cmd_ready) begin
        longint pg;
        pg = longint'(addr) / PAGE_W;
        case (cmd)
          2'd0: begin rcount <= T_READ; raddr = longint'(addr); n_read <= n_read + 1; end
          2'd1: begin
            if (dirty.exists(pg) && dirty[pg]) errors <= errors + 1;
            dirty[pg] = 1;
            wbase = pg * PAGE_W;
            wleft <= PAGE_W;
            n_prog <= n_prog + 1;
          end
          default: begin
            if (pg % BLK_PAGES != 0) errors <= errors + 1;
            for (longint p = pg; p < pg + BLK_PAGES; p++) begin
              dirty[p] = 0;
              for (longint w = 0; w < PAGE_W; w++) if (mem.exists(p * PAGE_W + w)) mem.delete(p * PAGE_W + w);
            end
            busy <= T_ERASE;
            n_erase <= n_erase + 1;
          end
        endcase
      end
    end
  end
endmodule
