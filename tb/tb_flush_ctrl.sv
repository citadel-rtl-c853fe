// tb_flush_ctrl: triggers the flush sequence repeatedly, answers the five
// unit requests in random order and at random times, and checks that each
// unit is asked exactly once, that completion is signalled exactly once
// after the last unit finishes, and that triggers while busy are ignored.
module tb_flush_ctrl;
  logic clk = 0, rst_n = 1, trigger = 0, busy, done_pulse;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic [4:0] flush_req, flush_done;
  int checks = 0, failures = 0;
  flush_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [4:0] finished;
    flush_done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    #1 chk(!busy && flush_req == 0, "idle after reset");
    for (int round = 0; round < 200; round++) begin
      @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
      chk(busy && flush_req == 5'h1F, "all units asked");
      finished = 0;
      while (finished != 5'h1F) begin
        flush_done = 5'($urandom) & ~finished & flush_req;
        trigger = ($urandom % 8 == 0);
        #1;
        chk(flush_req == ~finished, "requests drop once a unit is done");
        chk(done_pulse == ((finished | flush_done) == 5'h1F), "completion exactly when last unit is done");
        finished |= flush_done;
        @(negedge clk); flush_done = 0; trigger = 0;
      end
      #1 chk(!busy && !done_pulse && flush_req == 0, "idle afterwards");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
