// tb_mshr_partition: random traffic from two cores into the static LLC MSHR
// partition (16 entries, 8 per core). A reference counter per core checks
// that a core is stalled exactly when its own 8 entries are in use, that the
// other core is never affected, and that responses free entries.
module tb_mshr_partition;
  import citadel_pkg::*;
  localparam int N = 2, TOTAL = 16, SHARE = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready, resp_fire, full;
  int checks = 0, failures = 0;
  int cnt [N];
  int nfull = 0;
  mshr_partition #(.N(N), .TOTAL(TOTAL)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; resp_fire = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        // core 0 floods, core 1 is light; phases change the response rate
        in_valid[c] = (c == 0) ? ($urandom % 8 != 0) : ($urandom % 4 == 0);
        out_ready[c] = 1'($urandom);
        resp_fire[c] = (cnt[c] > 0) && ($urandom % ((it / 1000) % 2 ? 2 : 6) == 0);
      end
      #1;
      for (int c = 0; c < N; c++) begin
        chk(full[c] == (cnt[c] == SHARE), "full flag");
        chk(out_valid[c] == (in_valid[c] && cnt[c] < SHARE), "request passes unless own share is used");
        chk(in_ready[c] == (out_ready[c] && cnt[c] < SHARE), "ready");
        if (full[c]) nfull++;
      end
      @(posedge clk);
      for (int c = 0; c < N; c++) cnt[c] += int'(out_valid[c] && out_ready[c]) - int'(resp_fire[c]);
    end
    chk(nfull > 100, "partition limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
