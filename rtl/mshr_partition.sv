// mshr_partition: static partition of the LLC's outstanding-request slots
// (MSHRs) between the cores.
//
// The LLC can track LLC_MAX_OUTST (16) outstanding requests.  Sharing them
// freely would let one core observe another's miss traffic through slot
// exhaustion, so each core owns a fixed share (16 / 2 = 8).  A core's
// requests are held back while its share is full, whatever the other core
// does; a slot is returned when the LLC answers that core.  The static split
// is the paper's; equal shares and the counter form are this design's.
//
// Combinational gating; the per-core counters update on each edge.
module mshr_partition
  import citadel_pkg::*;
#(
  parameter int unsigned N     = NCORES,
  parameter int unsigned TOTAL = LLC_MAX_OUTST
)(
  input  logic              clk,
  input  logic              rst_n,
  // from the cores
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  // towards the arbiter
  output logic [N-1:0]      out_valid,
  input  logic [N-1:0]      out_ready,
  // responses leaving the LLC, per core
  input  logic [N-1:0]      resp_fire,
  output logic [N-1:0]      full
);
  localparam int unsigned SHARE = TOTAL / N;
  localparam int CW = $clog2(SHARE + 1);
  logic [CW-1:0] cnt_q [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      full[i]      = (cnt_q[i] == CW'(SHARE));
      out_valid[i] = in_valid[i] && !full[i];
      in_ready[i]  = out_ready[i] && !full[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) cnt_q[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++)
        cnt_q[i] <= cnt_q[i] + CW'(out_valid[i] && out_ready[i]) - CW'(resp_fire[i]);
    end
  end
endmodule
