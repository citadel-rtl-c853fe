// tb_zero_device: checks the zero device's address window (one DRAM-sized
// window at 0x1_8000_0000), that every read returns an all-zero line one
// cycle later (held under back-pressure) and that writes are dropped.
module tb_zero_device;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic req_valid, req_ready, resp_valid, resp_ready, in_window; mem_req_t req; mem_resp_t resp;
  int checks = 0, failures = 0;
  int reads = 0, resps = 0;
  zero_device dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [PADDR_W-1:0] pa;
    req_valid = 0; resp_ready = 1; req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      pa = {$urandom, $urandom};
      case ($urandom % 4)
        0: pa = ZERO_BASE + 56'($urandom % (1 << 31));
        1: pa = DRAM_BASE + 56'($urandom % (1 << 31));
        2: pa = ZERO_BASE + (56'd1 << 31) + 56'($urandom % 4096);
        default: pa = 56'({$urandom, $urandom});
      endcase
      req.laddr = pa[55:6]; req.write = 0; #1;
      chk(in_window == ((pa >= ZERO_BASE) && (pa < ZERO_BASE + (56'd1 << 31))), "window decode");
    end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      req_valid = 1'($urandom); req.write = ($urandom % 3 == 0); req.data = {16{$urandom}};
      resp_ready = 1'($urandom);
      #1;
      if (resp_valid) chk(resp.data == '0, "zero data");
      @(posedge clk);
      if (req_valid && req_ready && !req.write) reads++;
      if (resp_valid && resp_ready) resps++;
      chk(reads - resps <= 1 && reads - resps >= 0, "one response per read");
    end
    @(negedge clk); req_valid = 0; resp_ready = 1; @(posedge clk);
    if (resp_valid) resps++;
    chk(reads == resps && reads > 300, "all reads answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
