// tb_llc_arbiter: random request/ready patterns into a 4-input and a 2-input
// round-robin arbiter. Checks that the grant is the first requester after
// the last granted one, that only the granted input sees ready, that the
// payload is the granted input's, and that under full load every input gets
// exactly its share of grants.
module tb_llc_arbiter;
  import citadel_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic [N-1:0] req_valid, req_ready; llc_req_t [N-1:0] req;
  logic out_valid, out_ready; llc_req_t out; logic [1:0] grant_idx;
  logic [1:0] v2, r2; llc_req_t [1:0] q2; logic o2v; llc_req_t o2; logic [0:0] g2;
  int checks = 0, failures = 0;
  int grants [N];
  llc_arbiter #(.N(N)) dut (.*);
  llc_arbiter #(.N(2)) dut2 (.clk, .rst_n, .req_valid(v2), .req_ready(r2), .req(q2), .out_valid(o2v),
                             .out_ready(1'b1), .out(o2), .grant_idx(g2));
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int last, exp; last = N - 1;
    req_valid = 0; out_ready = 0; v2 = 0;
    for (int i = 0; i < N; i++) begin req[i] = '0; req[i].laddr = 50'(i + 100); end
    q2 = '0; q2[0].laddr = 7; q2[1].laddr = 9;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      req_valid = (it >= 3000) ? '1 : N'($urandom);
      out_ready = (it >= 3000) ? 1'b1 : 1'($urandom);
      for (int i = 0; i < N; i++) req[i].data = {16{$urandom}};
      #1;
      exp = -1;
      for (int j = 1; j <= N; j++) if (exp < 0 && req_valid[(last + j) % N]) exp = (last + j) % N;
      chk(out_valid == (req_valid != 0), "out_valid");
      if (exp >= 0) begin
        chk(grant_idx == exp, "round-robin grant");
        chk(out == req[exp], "payload from granted input");
        chk(req_ready == (out_ready ? N'(1) << exp : '0), "ready only to granted input");
        if (out_ready) begin last = exp; if (it >= 3000) grants[exp]++; end
      end else chk(req_ready == 0, "no ready when idle");
    end
    for (int i = 0; i < N; i++) chk(grants[i] == 250, "equal share under full load");
    // two-input instance alternates under contention
    @(negedge clk); v2 = 2'b11;
    begin
      logic prev; #1 prev = g2;
      for (int i = 0; i < 10; i++) begin @(negedge clk); #1 chk(g2 != prev && o2.laddr == (g2 ? 9 : 7), "2-way alternation"); prev = g2; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
