// prins_host_if: memory-mapped host interface of PRINS.
//
// The host talks to PRINS through registers: it downloads kernels, writes the kernel
// parameters (data start address, kernel start address, kernel ID), triggers execution by a
// register write, polls the status register for completion or an exception, and reads the
// results from the controller's data buffer. Polling does not disturb a running kernel.
// It also reaches the storage rows through a row window (address + ROW_W/64 data words).
//
// Bus: one access per cycle on (addr, we, re, wdata). Writes take effect at the clock edge;
// read data appears on rdata one cycle after re, with rvalid.
// Word address map (64-bit registers):
//   0x0000 CTRL         W   bit0: start kernel, bit1: write row, bit2: read row
//   0x0001 STATUS       R   bit0 busy, bit1 done, bit2 exception (undefined instruction),
//                          bit3 last row access accepted, bit4 last row access refused
//   0x0002 KERNEL_ID   RW  kept for the host's bookkeeping
//   0x0003 KERNEL_START RW  first microcode address of the kernel
//   0x0004 DATA_START  RW  handed to the kernel in register r0
//   0x0005 RUN_CYCLES  R   cycles taken by the last kernel
//   0x0006 ROW_ADDR     RW  logical row address for row accesses
//   0x0008+i ROW_DATA   RW  64-bit word i of the row (written before a row write, filled by a
//                          row read once accepted)
//   0x000C PROG_LO      W   low 64 bits of the next instruction
//   0x4000+a PROG       W   writes instruction a = {wdata, PROG_LO}
//   0x8000+a BUF        R   data buffer word a
// The register-based protocol follows the paper; the map, widths and bus timing are this
// design's choices.
module prins_host_if
  import prins_pkg::*;
#(
  parameter int unsigned LAW = 12,   // logical row address width
  localparam int unsigned NW  = ROW_W / 64,
  localparam int unsigned NWA = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host bus
  input  logic [15:0]         addr,
  input  logic                we,
  input  logic                re,
  input  logic [63:0]         wdata,
  output logic [63:0]         rdata,
  output logic                rvalid,
  // controller
  output logic                k_start,
  output logic [PC_W-1:0]     k_start_pc,
  output logic [REG_W-1:0]    k_param,
  output logic                prog_we,
  output logic [PC_W-1:0]     prog_waddr,
  output instr_t              prog_wdata,
  output logic [BUF_AW-1:0]   buf_raddr,
  input  logic [REG_W-1:0]    buf_rdata,
  input  logic                k_busy,
  input  logic                k_done,
  input  logic                k_err,
  input  logic [31:0]         k_cycles,
  // storage management
  output logic                st_req,
  output logic                st_we,
  output logic [LAW-1:0]      st_addr,
  output logic [ROW_W-1:0]    st_wdata,
  input  logic                st_ack,
  input  logic                st_rej,
  input  logic [ROW_W-1:0]    st_rdata
);

  localparam logic [15:0] A_CTRL   = 16'h0000, A_STATUS = 16'h0001, A_KID   = 16'h0002,
                          A_KSTART = 16'h0003, A_DSTART = 16'h0004, A_CYC   = 16'h0005,
                          A_ROWA   = 16'h0006, A_ROWD   = 16'h0008, A_PLO   = 16'h000C;

  logic [63:0]       kid, kstart, dstart, rowa, plo;
  logic [63:0]       rowd [NW];
  logic              st_ok, st_bad, rd_pending;

  assign k_start_pc = PC_W'(kstart);
  assign k_param    = REG_W'(dstart);
  assign st_addr    = LAW'(rowa);
  always_comb begin
    for (int i = 0; i < NW; i++) st_wdata[64*i +: 64] = rowd[i];
  end

  // decoded strobes (combinational, same cycle as the bus write)
  assign k_start    = we && addr == A_CTRL && wdata[0];
  assign st_req     = we && addr == A_CTRL && (wdata[1] || wdata[2]);
  assign st_we      = wdata[1];
  assign prog_we    = we && addr[15:14] == 2'b01;
  assign prog_waddr = PC_W'(addr[13:0]);
  assign prog_wdata = instr_t'(INSTR_W'({wdata, plo}));
  assign buf_raddr  = BUF_AW'(addr[13:0]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      kid <= '0; kstart <= '0; dstart <= '0; rowa <= '0; plo <= '0;
      for (int i = 0; i < NW; i++) rowd[i] <= '0;
      st_ok <= 1'b0; st_bad <= 1'b0; rd_pending <= 1'b0;
    end else begin
      if (we) begin
        unique case (addr)
          A_KID:    kid    <= wdata;
          A_KSTART: kstart <= wdata;
          A_DSTART: dstart <= wdata;
          A_ROWA:   rowa   <= wdata;
          A_PLO:    plo    <= wdata;
          default: if (addr >= A_ROWD && addr < A_ROWD + 16'(NW)) rowd[addr[NWA-1:0]] <= wdata;
        endcase
      end
      if (st_req) begin
        st_ok      <= 1'b0;
        st_bad     <= 1'b0;
        rd_pending <= !st_we;
      end
      if (st_ack) begin
        st_ok      <= 1'b1;
        rd_pending <= 1'b0;
        if (rd_pending) for (int i = 0; i < NW; i++) rowd[i] <= st_rdata[64*i +: 64];
      end
      if (st_rej) begin
        st_bad     <= 1'b1;
        rd_pending <= 1'b0;
      end
    end
  end

  // read port
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      rvalid <= re;
      if (re) begin
        if (addr[15:14] == 2'b10) begin
          rdata <= buf_rdata;
        end else begin
          unique case (addr)
            A_STATUS: rdata <= {59'd0, st_bad, st_ok, k_err, k_done, k_busy};
            A_KID:    rdata <= kid;
            A_KSTART: rdata <= kstart;
            A_DSTART: rdata <= dstart;
            A_CYC:    rdata <= {32'd0, k_cycles};
            A_ROWA:   rdata <= rowa;
            default:  rdata <= (addr >= A_ROWD && addr < A_ROWD + 16'(NW))
                               ? rowd[addr[NWA-1:0]] : 64'd0;
          endcase
        end
      end
    end
  end

endmodule
