// dram_pad: pads every DRAM read to one fixed latency.
//
// DRAM timing depends on open rows, controller queues and refresh, all of
// which another security domain can influence or observe.  This block sits
// in front of the DRAM controller and releases each read response exactly
// PAD cycles after the read was sent, whatever the DRAM took, so the latency
// seen by the LLC carries no information.  PAD must cover the slowest DRAM
// read, including one that meets a refresh; a response that arrives later
// than that raises `late` (and is released at once) so the platform can
// detect a PAD set too short.  Reads must be answered in order by DRAM.
//
// Up to MAX_OUTST (24) reads may be in flight; a FIFO of issue times and a
// FIFO of returned data pair them up.  Writes pass through unpadded (they get
// no response).  PAD defaults to the 120-cycle memory latency of the
// prototype; the paper gives the policy, the FIFO structure is this
// design's.
module dram_pad
  import citadel_pkg::*;
#(
  parameter int unsigned PAD       = MEM_LATENCY,
  parameter int unsigned MAX_OUTST = MEM_MAX_OUTST
)(
  input  logic       clk,
  input  logic       rst_n,
  // from the LLC
  input  logic       req_valid,
  output logic       req_ready,
  input  mem_req_t   req,
  output logic       resp_valid,
  input  logic       resp_ready,
  output mem_resp_t  resp,
  // to the DRAM controller
  output logic       dram_req_valid,
  input  logic       dram_req_ready,
  output mem_req_t   dram_req,
  input  logic       dram_resp_valid,
  input  mem_resp_t  dram_resp,
  output logic       late
);
  localparam int AW = $clog2(MAX_OUTST);
  localparam int CW = $clog2(MAX_OUTST + 1);

  logic [31:0]     now_q;
  logic [31:0]     ts_q   [MAX_OUTST];
  mem_resp_t       dat_q  [MAX_OUTST];
  logic [AW-1:0]   ts_wr_q, dat_wr_q, rd_q;
  logic [CW-1:0]   outst_q, ndata_q;
  logic            head_has_data, head_due, send_rd;

  assign req_ready      = dram_req_ready && (req.write || outst_q < CW'(MAX_OUTST));
  assign dram_req_valid = req_valid && (req.write || outst_q < CW'(MAX_OUTST));
  assign dram_req       = req;
  assign send_rd        = req_valid && req_ready && !req.write;

  assign head_has_data = (ndata_q != '0);
  assign head_due      = (now_q - ts_q[rd_q]) >= 32'(PAD);
  assign resp_valid    = head_has_data && head_due;
  assign resp          = dat_q[rd_q];
  assign late          = head_has_data && ((now_q - ts_q[rd_q]) > 32'(PAD));

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    inc = (p == AW'(MAX_OUTST - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now_q <= '0; ts_wr_q <= '0; dat_wr_q <= '0; rd_q <= '0;
      outst_q <= '0; ndata_q <= '0;
      for (int i = 0; i < MAX_OUTST; i++) begin
        ts_q[i]  <= '0;
        dat_q[i] <= '0;
      end
    end else begin
      now_q <= now_q + 1;
      if (send_rd) begin
        ts_q[ts_wr_q] <= now_q;
        ts_wr_q       <= inc(ts_wr_q);
      end
      if (dram_resp_valid) begin
        dat_q[dat_wr_q] <= dram_resp;
        dat_wr_q        <= inc(dat_wr_q);
      end
      if (resp_valid && resp_ready) rd_q <= inc(rd_q);
      outst_q <= outst_q + CW'(send_rd) - CW'(resp_valid && resp_ready);
      ndata_q <= ndata_q + CW'(dram_resp_valid) - CW'(resp_valid && resp_ready);
    end
  end
endmodule
