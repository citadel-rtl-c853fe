// zero_device: a memory-side target that answers every read with zeros.
//
// It sits beside the DRAM controller below the LLC and covers a window as
// large as DRAM, placed so that its addresses collide with DRAM addresses in
// every LLC index bit.  Reading an eviction set in this window therefore
// flushes exactly the LLC sets of one region slice, without touching DRAM.
// Writes (write-backs of the zero lines) are dropped.  The window base
// (0x1_8000_0000) is this design's choice: the paper places it in "the upper
// physical address space".
//
// Interface: the line-level memory request/response of the LLC's memory
// port.  Timing: a read is answered in the cycle after it is accepted; one
// read is held at a time.
module zero_device
  import citadel_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  mem_req_t   req,
  output logic       resp_valid,
  input  logic       resp_ready,
  output mem_resp_t  resp,
  output logic       in_window
);
  logic pend_q;

  // does the request address fall in the zero window?
  always_comb begin
    logic [PADDR_W-1:0] pa;
    pa = {req.laddr, {LINE_OFF_W{1'b0}}};
    in_window = (pa >= ZERO_BASE) && ((pa - ZERO_BASE) >> DRAM_W) == '0;
  end

  assign req_ready  = !pend_q || resp_ready;
  assign resp_valid = pend_q;
  assign resp.data  = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend_q <= 1'b0;
    else begin
      if (resp_valid && resp_ready) pend_q <= 1'b0;
      if (req_valid && req_ready && !req.write) pend_q <= 1'b1;
    end
  end
endmodule
