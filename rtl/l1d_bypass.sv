// l1d_bypass: routes an enclave's shared-memory accesses around the L1 data
// cache, straight to the LLC.
//
// The L1-D is private to a core but its state is visible to other cores
// through the coherence protocol (a store to a line another core caches is
// slower).  Private accesses may run speculatively, so letting shared lines
// live in the L1-D would make the enclave's speculative private behaviour
// observable.  Instead, when the Safe-mode mechanism is active (an enclave
// range is set) a shared access never enters the L1-D: a load reads the line
// from the LLC and picks its bytes; a store writes its bytes into the LLC
// line under a byte mask.  Private accesses, and all accesses when the
// mechanism is off, go to the L1-D as usual.
//
// One access is handled at a time; the result is returned on resp_* with
// the access's ROB tag.  Loads return the raw bytes zero-extended (sign
// extension is left to the core).  The single-outstanding handshake is this
// design's; the routing rule is the paper's.
module l1d_bypass
  import citadel_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [CORE_W-1:0]  core_id,
  // from translation
  input  logic               in_valid,
  output logic               in_ready,
  input  mem_uop_t           in_uop,
  input  logic [PADDR_W-1:0] in_pa,
  input  logic               in_private,
  input  logic               mech_en,
  // L1-D port (the cache itself is outside)
  output logic               l1_req_valid,
  input  logic               l1_req_ready,
  output logic [PADDR_W-1:0] l1_req_pa,
  output mem_uop_t           l1_req_uop,
  input  logic               l1_resp_valid,
  input  logic [XLEN-1:0]    l1_resp_data,
  // LLC port
  output logic               llc_req_valid,
  input  logic               llc_req_ready,
  output llc_req_t           llc_req,
  input  logic               llc_resp_valid,
  input  llc_resp_t          llc_resp,
  // result to the core
  output logic               resp_valid,
  output logic [XLEN-1:0]    resp_data,
  output logic [ROB_TAG_W-1:0] resp_rob_tag,
  output logic               bypassed
);
  typedef enum logic [1:0] {B_IDLE, B_SEND, B_WAIT} bstate_e;

  bstate_e            st_q;
  logic               byp_q;
  mem_uop_t           uop_q;
  logic [PADDR_W-1:0] pa_q;

  assign bypassed = mech_en && !in_private;
  assign in_ready = (st_q == B_IDLE);

  // L1 request
  assign l1_req_valid = (st_q == B_SEND) && !byp_q;
  assign l1_req_pa    = pa_q;
  assign l1_req_uop   = uop_q;

  // LLC request: whole line, byte-masked for stores
  always_comb begin
    logic [5:0] off;
    logic [7:0] nbytes;
    off = pa_q[LINE_OFF_W-1:0];
    nbytes = 8'd1 << uop_q.size;
    llc_req_valid = (st_q == B_SEND) && byp_q;
    llc_req.core  = core_id;
    llc_req.src   = 1'b1;
    llc_req.write = uop_q.is_store;
    llc_req.laddr = pa_q[PADDR_W-1:LINE_OFF_W];
    llc_req.be    = '0;
    llc_req.data  = '0;
    if (uop_q.is_store) begin
      llc_req.be   = ((LINE_BYTES'(1) << nbytes) - 1'b1) << off;
      llc_req.data = LINE_W'(uop_q.sdata) << (off * 8);
    end
  end

  always_comb begin
    logic [LINE_W-1:0] sh;
    logic [XLEN-1:0]   mask;
    sh   = llc_resp.data >> (pa_q[LINE_OFF_W-1:0] * 8);
    mask = (uop_q.size == 2'd3) ? '1 : ((XLEN'(1) << ((XLEN'(1) << uop_q.size) * 8)) - 1'b1);
    resp_valid   = (st_q == B_WAIT) && (byp_q ? llc_resp_valid : l1_resp_valid);
    resp_data    = byp_q ? (sh[XLEN-1:0] & mask) : l1_resp_data;
    resp_rob_tag = uop_q.rob_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= B_IDLE; byp_q <= 1'b0; uop_q <= '0; pa_q <= '0;
    end else begin
      unique case (st_q)
        B_IDLE: if (in_valid) begin
          byp_q <= bypassed;
          uop_q <= in_uop;
          pa_q  <= in_pa;
          st_q  <= B_SEND;
        end
        B_SEND: if (byp_q ? llc_req_ready : l1_req_ready) st_q <= B_WAIT;
        B_WAIT: if (resp_valid) st_q <= B_IDLE;
        default: st_q <= B_IDLE;
      endcase
    end
  end
endmodule
