// mem_rs: memory reservation station with Safe-mode re-dispatch.
//
// Memory micro-ops arrive from rename and wait here until their source
// operands are ready.  Each cycle the oldest eligible entry (oldest by ROB
// order, measured from the ROB head) is dispatched to the memory execution
// pipeline together with its entry index.  Unlike a plain reservation
// station, dispatch does not free the entry.  Two status bits per entry
// track what may happen next:
//   to_dispatch   - set on insert, cleared when the entry is dispatched; an
//                   entry in flight is never picked again.
//   to_redispatch - set by the pipeline when it squashes a speculative
//                   shared access; the entry may dispatch again once it is
//                   at the head of the ROB (redispatch_ready).
// The entry is freed (dequeued) only when the pipeline's Safe-mode check lets
// the access through to translation.  redispatch_ready compares each entry's
// ROB tag with the ROB head.  These bits and the dispatch rule follow the
// paper; the free-slot choice, the single two-source wake-up bus and the
// global `kill` on a misprediction are this design's simplifications.
//
// Interface: enq_* (valid/ready), wake_* (result broadcast), disp_* to the
// pipeline (valid/ready, index), deq_* and redisp_* from the pipeline.
// Timing: an entry inserted in cycle t can dispatch in t+1 at the earliest.
module mem_rs
  import citadel_pkg::*;
#(
  parameter int unsigned ENTRIES = MEMRS_ENTRIES,
  parameter int unsigned NWAKE   = 2
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     kill,
  // insert
  input  logic                     enq_valid,
  output logic                     enq_ready,
  input  mem_uop_t                 enq_uop,
  input  logic [PREG_W-1:0]        enq_src1,
  input  logic                     enq_src1_rdy,
  input  logic [PREG_W-1:0]        enq_src2,
  input  logic                     enq_src2_rdy,
  // operand wake-up
  input  logic [NWAKE-1:0]         wake_valid,
  input  logic [NWAKE-1:0][PREG_W-1:0] wake_tag,
  // ROB head
  input  logic [ROB_TAG_W-1:0]     rob_head,
  // dispatch to the memory pipeline
  output logic                     disp_valid,
  input  logic                     disp_ready,
  output mem_uop_t                 disp_uop,
  output logic [$clog2(ENTRIES)-1:0] disp_idx,
  output logic                     disp_redispatch,   // this dispatch is a re-dispatch
  // from the Safe-mode check
  input  logic                     deq_valid,
  input  logic [$clog2(ENTRIES)-1:0] deq_idx,
  input  logic                     redisp_valid,
  input  logic [$clog2(ENTRIES)-1:0] redisp_idx,
  output logic [$clog2(ENTRIES):0]   occupancy
);
  localparam int IW = $clog2(ENTRIES);

  typedef struct packed {
    logic               valid;
    logic               to_dispatch;
    logic               to_redispatch;
    logic [PREG_W-1:0]  src1;
    logic               src1_rdy;
    logic [PREG_W-1:0]  src2;
    logic               src2_rdy;
    mem_uop_t           uop;
  } rs_entry_t;

  rs_entry_t ent_q [ENTRIES];

  logic [ENTRIES-1:0] free, redispatch_ready, eligible;
  logic [IW-1:0]      free_idx, sel_idx;
  logic               have_free, have_sel;

  // free slot: lowest index
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      free[i] = !ent_q[i].valid;
      if (free[i]) begin
        have_free = 1'b1;
        free_idx  = IW'(i);
      end
    end
  end
  assign enq_ready = have_free;

  // eligibility and oldest-first select
  always_comb begin
    logic [ROB_TAG_W-1:0] best_age, age;
    have_sel = 1'b0;
    sel_idx  = '0;
    best_age = '1;
    for (int i = 0; i < ENTRIES; i++) begin
      redispatch_ready[i] = (ent_q[i].uop.rob_tag == rob_head);
      eligible[i] = ent_q[i].valid && ent_q[i].src1_rdy && ent_q[i].src2_rdy &&
                    (ent_q[i].to_dispatch ||
                     (ent_q[i].to_redispatch && redispatch_ready[i]));
      age = ent_q[i].uop.rob_tag - rob_head;
      if (eligible[i] && (!have_sel || age < best_age)) begin
        have_sel = 1'b1;
        sel_idx  = IW'(i);
        best_age = age;
      end
    end
  end

  assign disp_valid = have_sel;
  assign disp_idx   = sel_idx;
  assign disp_uop   = ent_q[sel_idx].uop;
  assign disp_redispatch = !ent_q[sel_idx].to_dispatch;

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy += (IW+1)'(ent_q[i].valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent_q[i] <= '0;
    end else if (kill) begin
      for (int i = 0; i < ENTRIES; i++) ent_q[i].valid <= 1'b0;
    end else begin
      // operand wake-up
      for (int i = 0; i < ENTRIES; i++)
        for (int w = 0; w < NWAKE; w++)
          if (wake_valid[w]) begin
            if (ent_q[i].src1 == wake_tag[w]) ent_q[i].src1_rdy <= 1'b1;
            if (ent_q[i].src2 == wake_tag[w]) ent_q[i].src2_rdy <= 1'b1;
          end
      if (disp_valid && disp_ready) begin
        ent_q[sel_idx].to_dispatch   <= 1'b0;
        ent_q[sel_idx].to_redispatch <= 1'b0;
      end
      if (redisp_valid) ent_q[redisp_idx].to_redispatch <= 1'b1;
      if (deq_valid)    ent_q[deq_idx].valid <= 1'b0;
      if (enq_valid && enq_ready) begin
        ent_q[free_idx].valid         <= 1'b1;
        ent_q[free_idx].to_dispatch   <= 1'b1;
        ent_q[free_idx].to_redispatch <= 1'b0;
        ent_q[free_idx].uop           <= enq_uop;
        ent_q[free_idx].src1          <= enq_src1;
        ent_q[free_idx].src2          <= enq_src2;
        ent_q[free_idx].src1_rdy      <= enq_src1_rdy || wake_hit(enq_src1);
        ent_q[free_idx].src2_rdy      <= enq_src2_rdy || wake_hit(enq_src2);
      end
    end
  end

  function automatic logic wake_hit(input logic [PREG_W-1:0] t);
    wake_hit = 1'b0;
    for (int w = 0; w < NWAKE; w++)
      if (wake_valid[w] && wake_tag[w] == t) wake_hit = 1'b1;
  endfunction

`ifndef SYNTHESIS
  // A dequeue or re-dispatch request must name an entry that is in flight.
  assert property (@(posedge clk) disable iff (kill)
                   deq_valid |-> (ent_q[deq_idx].valid && !ent_q[deq_idx].to_dispatch));
  assert property (@(posedge clk) disable iff (kill)
                   redisp_valid |-> ent_q[redisp_idx].valid);
`endif
endmodule
