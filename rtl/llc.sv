// llc: shared last-level cache with reconfigurable set partitioning.
//
// A 1 MB, 16-way, write-back, write-allocate cache of 64-byte lines shared
// by both cores.  The set of a line is not taken from its address bits
// directly: llc_set_index maps it into the LLC slice owned by the line's
// physical memory region, so regions (security domains) never share sets.
// The tag is the whole line address, so lines that the mapping folds onto
// one set stay distinct.  The set-index range table is written through the
// cfg_* port (the LLC's MMIO window).
//
// Requests are whole-line reads or byte-masked writes (L1 write-backs and
// L1-bypassing enclave stores) from the round-robin arbiter.  A hit is
// answered LATENCY (10) cycles after it is accepted.  On a miss the victim
// (an invalid way, else the set's round-robin way) is written back if dirty,
// the line is read from memory, and the request completes.
//
// Up to QDEPTH (16, the prototype's outstanding-request limit) accepted
// requests wait in an input queue, but this model serves them one at a time:
// the prototype's LLC overlaps misses and keeps the cores' L1s coherent, and
// neither is modelled here.  A request's latency counts from the cycle it
// leaves the queue.  Replacement is round-robin per set (the paper does not give
// the policy).
module llc
  import citadel_pkg::*;
#(
  parameter int unsigned SETS    = LLC_SETS,
  parameter int unsigned WAYS    = LLC_WAYS,
  parameter int unsigned LATENCY = LLC_LATENCY,
  parameter int unsigned QDEPTH  = LLC_MAX_OUTST
)(
  input  logic                   clk,
  input  logic                   rst_n,
  // set-index range table configuration
  input  logic                   cfg_we,
  input  logic [REGION_ID_W-1:0] cfg_region,
  input  logic [SET_BASE_W-1:0]  cfg_base,
  input  logic [SET_SIZE_W-1:0]  cfg_size_m1,
  output logic [SIRT_W-1:0]      sirt,
  // requests from the arbiter
  input  logic                   req_valid,
  output logic                   req_ready,
  input  llc_req_t               req,
  output logic                   resp_valid,
  input  logic                   resp_ready,
  output llc_resp_t              resp,
  // memory side
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output mem_req_t               mem_req,
  input  logic                   mem_resp_valid,
  output logic                   mem_resp_ready,
  input  mem_resp_t              mem_resp,
  // events
  output logic                   ev_hit,
  output logic                   ev_miss,
  output logic                   ev_writeback,
  output logic [$clog2(SETS)-1:0] cur_set
);
  localparam int SW = $clog2(SETS);
  localparam int WW = $clog2(WAYS);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_FILL_REQ, S_FILL_WAIT, S_RESP} state_e;

  logic [SETS-1:0][WAYS-1:0] valid_q;
  logic [SETS-1:0][WAYS-1:0] dirty_q;
  logic [SETS-1:0][WW-1:0]   rr_q;

  state_e             st_q;
  llc_req_t           r_q;
  logic [SW-1:0]      set_q;
  logic [WW-1:0]      way_q;
  logic [7:0]         cnt_q;
  logic [LINE_W-1:0]  rdata_q;

  logic [SW-1:0]      map_set;
  logic [REGION_ID_W-1:0] map_region;
  logic               hit;
  logic [WW-1:0]      hit_way, victim;
  logic               have_inv;
  logic               hit_done;

  // per-way tag and data arrays: one write port, read at the latched set
  logic [LADDR_W-1:0] tag_rd  [WAYS];
  logic [LINE_W-1:0]  data_rd [WAYS];
  logic               tag_we, data_we;
  logic [WW-1:0]      wr_way;
  logic [LINE_W-1:0]  wr_data;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [LADDR_W-1:0] tag_mem  [SETS];
    logic [LINE_W-1:0]  data_mem [SETS];
    always_ff @(posedge clk) begin
      if (tag_we  && wr_way == WW'(w)) tag_mem[set_q]  <= r_q.laddr;
      if (data_we && wr_way == WW'(w)) data_mem[set_q] <= wr_data;
    end
    assign tag_rd[w]  = tag_mem[set_q];
    assign data_rd[w] = data_mem[set_q];
  end

  // request queue: up to QDEPTH accepted requests wait here
  localparam int QW = $clog2(QDEPTH);
  llc_req_t          q_mem [QDEPTH];
  logic [QW-1:0]     q_wr_q, q_rd_q;
  logic [QW:0]       q_cnt_q;
  logic              q_pop;
  llc_req_t          q_head;

  assign req_ready = (q_cnt_q != (QW+1)'(QDEPTH));
  assign q_head    = q_mem[q_rd_q];
  assign q_pop     = (st_q == S_IDLE) && (q_cnt_q != '0);

  always_ff @(posedge clk) begin
    if (req_valid && req_ready) q_mem[q_wr_q] <= req;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wr_q <= '0; q_rd_q <= '0; q_cnt_q <= '0;
    end else begin
      if (req_valid && req_ready) q_wr_q <= q_wr_q + 1'b1;
      if (q_pop)                  q_rd_q <= q_rd_q + 1'b1;
      q_cnt_q <= q_cnt_q + (QW+1)'(req_valid && req_ready) - (QW+1)'(q_pop);
    end
  end

  llc_set_index #(.SETS(SETS)) u_idx (
    .clk, .rst_n, .cfg_we, .cfg_region, .cfg_base, .cfg_size_m1, .sirt,
    .laddr(q_head.laddr), .region(map_region), .set_idx(map_set));

  assign cur_set = set_q;

  always_comb begin
    hit = 1'b0; hit_way = '0; have_inv = 1'b0; victim = rr_q[set_q];
    for (int w = WAYS-1; w >= 0; w--) begin
      if (valid_q[set_q][w] && tag_rd[w] == r_q.laddr) begin
        hit = 1'b1; hit_way = WW'(w);
      end
      if (!valid_q[set_q][w]) begin
        have_inv = 1'b1; victim = WW'(w);
      end
    end
  end

  function automatic logic [LINE_W-1:0] merge(input logic [LINE_W-1:0] old,
                                              input logic [LINE_BYTES-1:0] be,
                                              input logic [LINE_W-1:0] nw);
    merge = old;
    for (int b = 0; b < LINE_BYTES; b++)
      if (be[b]) merge[b*8 +: 8] = nw[b*8 +: 8];
  endfunction

  // a hit completes once LATENCY cycles have passed since acceptance
  assign hit_done = (st_q == S_LOOKUP) && hit && (cnt_q >= 8'(LATENCY - 1));

  always_comb begin
    tag_we  = 1'b0;
    data_we = 1'b0;
    wr_way  = way_q;
    wr_data = mem_resp.data;
    if (hit_done && r_q.write) begin
      data_we = 1'b1;
      wr_way  = hit_way;
      wr_data = merge(data_rd[hit_way], r_q.be, r_q.data);
    end else if (st_q == S_FILL_WAIT && mem_resp_valid) begin
      tag_we  = 1'b1;
      data_we = 1'b1;
      wr_data = r_q.write ? merge(mem_resp.data, r_q.be, r_q.data) : mem_resp.data;
    end
  end

  assign resp_valid     = (st_q == S_RESP);
  assign resp.core      = r_q.core;
  assign resp.src       = r_q.src;
  assign resp.write     = r_q.write;
  assign resp.data      = rdata_q;
  assign mem_resp_ready = (st_q == S_FILL_WAIT);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    if (st_q == S_WB) begin
      mem_req_valid = 1'b1;
      mem_req.write = 1'b1;
      mem_req.laddr = tag_rd[way_q];
      mem_req.data  = data_rd[way_q];
    end else if (st_q == S_FILL_REQ) begin
      mem_req_valid = 1'b1;
      mem_req.write = 1'b0;
      mem_req.laddr = r_q.laddr;
    end
  end

  assign ev_hit       = hit_done;
  assign ev_miss      = (st_q == S_LOOKUP) && !hit;
  assign ev_writeback = (st_q == S_WB) && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; r_q <= '0; set_q <= '0; way_q <= '0; cnt_q <= '0; rdata_q <= '0;
      valid_q <= '0; dirty_q <= '0; rr_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (q_pop) begin
          r_q   <= q_head;
          set_q <= map_set;
          cnt_q <= 8'd1;
          st_q  <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            if (hit_done) begin
              rdata_q <= data_rd[hit_way];
              if (r_q.write) dirty_q[set_q][hit_way] <= 1'b1;
              st_q <= S_RESP;
            end else cnt_q <= cnt_q + 1'b1;
          end else begin
            way_q <= victim;
            if (!have_inv) rr_q[set_q] <= rr_q[set_q] + 1'b1;
            st_q  <= (valid_q[set_q][victim] && dirty_q[set_q][victim]) ? S_WB : S_FILL_REQ;
          end
        end
        S_WB: if (mem_req_ready) st_q <= S_FILL_REQ;
        S_FILL_REQ: if (mem_req_ready) st_q <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_resp_valid) begin
          valid_q[set_q][way_q] <= 1'b1;
          dirty_q[set_q][way_q] <= r_q.write;
          rdata_q               <= mem_resp.data;
          st_q                  <= S_RESP;
        end
        S_RESP: if (resp_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
