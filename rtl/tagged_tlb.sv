// tagged_tlb: fully associative data TLB whose entries are tagged private or
// shared.
//
// With dual page tables, one virtual page can be translated by the enclave
// page table or by the OS page table depending on which side of the private
// range it falls.  A large page (2 MB or 1 GB) cached from one table could
// otherwise alias an address belonging to the other side when the private
// range is smaller than the page.  Each entry therefore records which table
// filled it, and a lookup hits only on an entry with the same tag.  The same
// tagging is what the paper applies to the page walker's translation cache.
//
// Sv39 translation: 4 KB, 2 MB and 1 GB pages.  Lookup is combinational;
// a refill writes the entry chosen by a round-robin pointer on the next
// edge; `flush` invalidates every entry (used on a security-domain switch).
// The entry count (32) and the replacement policy are this design's choices;
// the paper does not give them.
module tagged_tlb
  import citadel_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  // lookup
  input  logic [38:0]         va,
  input  logic                va_private,
  output logic                hit,
  output logic [PADDR_W-1:0]  pa,
  // refill from the page walker
  input  logic                fill_valid,
  input  logic [26:0]         fill_vpn,
  input  logic                fill_private,
  input  logic [1:0]          fill_level,     // 0: 4 KB, 1: 2 MB, 2: 1 GB
  input  logic [43:0]         fill_ppn
);
  typedef struct packed {
    logic        valid;
    logic        priv_tag;
    logic [1:0]  level;
    logic [26:0] vpn;
    logic [43:0] ppn;
  } tlb_entry_t;

  tlb_entry_t ent_q [ENTRIES];
  logic [$clog2(ENTRIES)-1:0] rr_q;

  function automatic logic [26:0] level_mask(input logic [1:0] lvl);
    unique case (lvl)
      2'd0:    level_mask = 27'h7FFFFFF;
      2'd1:    level_mask = 27'h7FFFE00;
      default: level_mask = 27'h7FC0000;
    endcase
  endfunction

  always_comb begin
    logic [26:0] vpn, m;
    vpn = va[38:12];
    hit = 1'b0;
    pa  = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      m = level_mask(ent_q[i].level);
      if (ent_q[i].valid && ent_q[i].priv_tag == va_private &&
          ((ent_q[i].vpn & m) == (vpn & m))) begin
        hit = 1'b1;
        unique case (ent_q[i].level)
          2'd0:    pa = {ent_q[i].ppn, va[11:0]};
          2'd1:    pa = {ent_q[i].ppn[43:9], va[20:0]};
          default: pa = {ent_q[i].ppn[43:18], va[29:0]};
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent_q[i] <= '0;
      rr_q <= '0;
    end else if (flush) begin
      for (int i = 0; i < ENTRIES; i++) ent_q[i].valid <= 1'b0;
    end else if (fill_valid) begin
      ent_q[rr_q] <= '{valid: 1'b1, priv_tag: fill_private, level: fill_level,
                       vpn: fill_vpn, ppn: fill_ppn};
      rr_q <= rr_q + 1'b1;
    end
  end
endmodule
