// llc_arbiter: fair round-robin arbiter at the entry of the shared LLC.
//
// Each core presents one request stream (valid/ready).  When several are
// valid, the grant goes to the first requester after the one granted last,
// so no core can delay another by more than one request.  The request the
// LLC accepts is forwarded unchanged (it carries its core number).  The round-robin
// policy is the paper's; the valid/ready handshake is this design's.
//
// Combinational grant; the priority pointer moves on an accepted request.
module llc_arbiter
  import citadel_pkg::*;
#(
  parameter int unsigned N = NCORES
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      req_valid,
  output logic [N-1:0]      req_ready,
  input  llc_req_t [N-1:0]  req,
  output logic              out_valid,
  input  logic              out_ready,
  output llc_req_t          out,
  output logic [$clog2(N)-1:0] grant_idx
);
  localparam int W = (N > 1) ? $clog2(N) : 1;
  logic [W-1:0] last_q;

  always_comb begin
    logic [W-1:0] k;
    out_valid = 1'b0;
    grant_idx = '0;
    for (int unsigned j = 1; j <= N; j++) begin
      k = W'((int'(last_q) + j) % N);
      if (!out_valid && req_valid[k]) begin
        out_valid = 1'b1;
        grant_idx = W'(k);
      end
    end
  end

  assign out = req[grant_idx];

  // the grant depends on the valids only, so ready never feeds back into it
  always_comb begin
    req_ready = '0;
    req_ready[grant_idx] = out_valid && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last_q <= W'(N-1);
    else if (out_valid && out_ready) last_q <= grant_idx;
  end
endmodule
