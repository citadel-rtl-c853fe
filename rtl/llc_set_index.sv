// llc_set_index: reconfigurable LLC set-index mapping (set-index range
// table).
//
// Every physical memory region owns a contiguous range of LLC sets, given by
// a BASE and a SIZE held in the set-index range table: 64 entries of 19 bits,
// 1216 bits in all.  For a line address the mapping (1) takes the region ID
// from the address' upper bits and looks up that region's range, (2) takes
// the ordinary set index from the middle of the address and reduces it
// modulo the range size, and (3) adds the range base.  The result always
// lies inside the region's range, which partitions the LLC between regions
// with ranges of any size.  Because many line addresses of a region now
// share one set, the LLC keeps the whole line address as its tag.
//
// The table is written by the security monitor through the LLC's MMIO
// window (one entry per write).  Each entry holds BASE in 10 bits and SIZE-1
// in 9 bits, so a range covers 1 to 512 sets: this split of the paper's 1216
// bits is this design's reading.  At reset every region gets an equal slice
// of 16 sets (the static scheme).  The lookup is combinational.
module llc_set_index
  import citadel_pkg::*;
#(
  parameter int unsigned SETS = LLC_SETS
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [REGION_ID_W-1:0]  cfg_region,
  input  logic [SET_BASE_W-1:0]   cfg_base,
  input  logic [SET_SIZE_W-1:0]   cfg_size_m1,
  output logic [SIRT_W-1:0]       sirt,
  input  logic [LADDR_W-1:0]      laddr,
  output logic [REGION_ID_W-1:0]  region,
  output logic [$clog2(SETS)-1:0] set_idx
);
  localparam int SW = $clog2(SETS);
  localparam int unsigned SLICE = SETS / NREGIONS;

  typedef struct packed {
    logic [SET_BASE_W-1:0] base;
    logic [SET_SIZE_W-1:0] size_m1;
  } sirt_entry_t;

  sirt_entry_t tab_q [NREGIONS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGIONS; r++) begin
        tab_q[r].base    <= SET_BASE_W'(r * SLICE);
        tab_q[r].size_m1 <= SET_SIZE_W'(SLICE - 1);
      end
    end else if (cfg_we) begin
      tab_q[cfg_region] <= '{base: cfg_base, size_m1: cfg_size_m1};
    end
  end

  always_comb begin
    for (int r = 0; r < NREGIONS; r++) sirt[r*SIRT_ENTRY_W +: SIRT_ENTRY_W] = tab_q[r];
  end

  always_comb begin
    logic [SW-1:0]         orig;
    logic [SET_SIZE_W:0]   size;
    logic [SW-1:0]         rem;
    region  = laddr[REGION_SHIFT-LINE_OFF_W +: REGION_ID_W];   // (1)
    orig    = laddr[SW-1:0];
    size    = {1'b0, tab_q[region].size_m1} + 1'b1;
    rem     = SW'(orig % SW'(size));                           // (2)
    set_idx = SW'(tab_q[region].base) + rem;                   // (3)
  end
endmodule
