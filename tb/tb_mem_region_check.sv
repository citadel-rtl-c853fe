// tb_mem_region_check: random physical addresses against random region
// bitmaps, compared with a reference computed from the 32 MB region map.
module tb_mem_region_check;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic cfg_we, cfg_sel; logic [NREGIONS-1:0] cfg_wdata, bm_private, bm_shared;
  priv_e priv; logic [PADDR_W-1:0] pa; logic va_private, allowed;
  logic [REGION_ID_W-1:0] region;
  int checks = 0, failures = 0;

  mem_region_check dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s pa=%h", what, pa); end
  endtask

  initial begin
    logic [63:0] bp, bs;
    cfg_we = 0; cfg_sel = 0; cfg_wdata = 0; priv = PRIV_U; pa = 0; va_private = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      bp = {$urandom, $urandom}; bs = {$urandom, $urandom} & ~bp;
      @(negedge clk); cfg_we = 1; cfg_sel = 0; cfg_wdata = bp;
      @(negedge clk); cfg_sel = 1; cfg_wdata = bs;
      @(negedge clk); cfg_we = 0;
      chk(bm_private == bp && bm_shared == bs, "bitmaps written");
      for (int i = 0; i < 400; i++) begin
        logic exp; int reg_id; logic indram;
        reg_id = $urandom_range(0, 63);
        if (i % 10 == 0) pa = 56'h40000000 + 56'($urandom_range(0, 1000));   // below DRAM
        else if (i % 10 == 1) pa = 56'h1_0000_0000 + 56'($urandom);          // above DRAM
        else pa = 56'h8000_0000 + (56'(reg_id) << 25) + 56'($urandom_range(0, 32'h1FF_FFFF));
        va_private = $urandom_range(0,1);
        priv = ($urandom_range(0, 9) == 0) ? PRIV_M : PRIV_U;
        #1;
        indram = (pa >= 56'h8000_0000) && (pa < 56'h1_0000_0000);
        if (priv == PRIV_M) exp = 1;
        else if (!indram) exp = 0;
        else exp = va_private ? bp[(pa - 56'h8000_0000) >> 25] : bs[(pa - 56'h8000_0000) >> 25];
        chk(allowed == exp, "access decision");
        if (indram) chk(region == 6'((pa - 56'h8000_0000) >> 25), "region id");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
