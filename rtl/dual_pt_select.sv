// dual_pt_select: enclave private virtual range check and page-table
// selection (dual page tables).
//
// Two registers, evbase and evmask, describe the running enclave's private
// virtual range: an address is private when (va & evmask) == evbase.  A
// private address is translated with the enclave page table (root eptbr,
// kept in enclave memory); every other address is shared and uses the OS
// page table (root ptbr).  Because the decision needs only the virtual
// address, the Safe-mode check can use it before any translation.
//
// Setting a range that no address can match (evbase has a bit outside
// evmask) turns the mechanism off for the OS: `mech_en` drops, and Safe mode
// then lets every access speculate.  The base/mask encoding is this
// design's choice, taken from the Sanctum mechanism the paper adopts; the
// paper says only that two new registers hold the range.
//
// The registers are written by the security monitor through a simple
// register-write port; the lookup is combinational.
module dual_pt_select
  import citadel_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [1:0]       cfg_sel,     // 0 evbase, 1 evmask, 2 eptbr, 3 ptbr
  input  logic [XLEN-1:0]  cfg_wdata,
  input  logic [XLEN-1:0]  va,
  output logic             is_private,
  output logic             mech_en,
  output logic [XLEN-1:0]  pt_root
);
  logic [XLEN-1:0] evbase_q, evmask_q, eptbr_q, ptbr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      evbase_q <= '1;          // empty range at reset: mechanism off
      evmask_q <= '0;
      eptbr_q  <= '0;
      ptbr_q   <= '0;
    end else if (cfg_we) begin
      unique case (cfg_sel)
        2'd0: evbase_q <= cfg_wdata;
        2'd1: evmask_q <= cfg_wdata;
        2'd2: eptbr_q  <= cfg_wdata;
        2'd3: ptbr_q   <= cfg_wdata;
      endcase
    end
  end

  assign mech_en    = ((evbase_q & ~evmask_q) == '0);
  assign is_private = mech_en && ((va & evmask_q) == evbase_q);
  assign pt_root    = is_private ? eptbr_q : ptbr_q;
endmodule
