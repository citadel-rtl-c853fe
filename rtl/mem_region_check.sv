// mem_region_check: physical memory region access check with two 64-bit
// region bitmaps.
//
// DRAM is cut into 64 regions of 32 MB.  The region of a physical address
// is read straight from its upper DRAM offset bits, so no lookup is needed
// anywhere in the hierarchy.  Each core holds two bitmaps written by the
// security monitor: the regions private to the running security domain and
// the regions it shares.  An access is allowed if its region's bit is set in
// the bitmap of the domain the virtual address belongs to: a private
// virtual address must land in a private region and a shared one in a
// shared region (the bound check of the dual page tables).  The check runs
// on every access, page-table-walk reads included.  Machine mode is not
// checked.  Addresses outside DRAM are refused for U/S mode: this, and
// the DRAM base 0x8000_0000, are this design's choices.
//
// Registers are written by the security monitor; the check is combinational.
module mem_region_check
  import citadel_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic               cfg_sel,     // 0 private bitmap, 1 shared bitmap
  input  logic [NREGIONS-1:0] cfg_wdata,
  output logic [NREGIONS-1:0] bm_private,
  output logic [NREGIONS-1:0] bm_shared,
  input  priv_e              priv,
  input  logic [PADDR_W-1:0] pa,
  input  logic               va_private,
  output logic [REGION_ID_W-1:0] region,
  output logic               allowed
);
  logic [NREGIONS-1:0] priv_q, shrd_q;
  logic                in_dram;
  logic [PADDR_W-1:0]  off;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      priv_q <= '0;
      shrd_q <= '0;
    end else if (cfg_we) begin
      if (cfg_sel) shrd_q <= cfg_wdata;
      else         priv_q <= cfg_wdata;
    end
  end

  assign bm_private = priv_q;
  assign bm_shared  = shrd_q;
  assign off     = pa - DRAM_BASE;
  assign in_dram = (pa >= DRAM_BASE) && (off[PADDR_W-1:DRAM_W] == '0);
  assign region  = off[REGION_SHIFT +: REGION_ID_W];

  always_comb begin
    if (priv == PRIV_M)  allowed = 1'b1;
    else if (!in_dram)   allowed = 1'b0;
    else if (va_private) allowed = priv_q[region];
    else                 allowed = shrd_q[region];
  end
endmodule
