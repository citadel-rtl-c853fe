// tb_llc_set_index: writes random base/size pairs for random regions and
// checks the index function new_index = base + (original_index mod size)
// against a reference table, together with the 1216-bit table image and the
// reset layout (16 sets per region).
module tb_llc_set_index;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic cfg_we = 0; logic [5:0] cfg_region; logic [9:0] cfg_base; logic [8:0] cfg_size_m1;
  logic [SIRT_W-1:0] sirt; logic [LADDR_W-1:0] laddr; logic [5:0] region; logic [9:0] set_idx;
  int checks = 0, failures = 0;
  int rbase [64], rsize [64];
  llc_set_index dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic probe();
    int r, o;
    laddr = {$urandom, $urandom};
    #1; r = int'(laddr[24:19]); o = int'(laddr[9:0]);
    chk(region == r, "region from address bits 30:25");
    chk(set_idx == 10'(rbase[r] + o % rsize[r]), $sformatf("set index r=%0d o=%0d", r, o));
  endtask

  initial begin
    cfg_region = 0; cfg_base = 0; cfg_size_m1 = 0; laddr = 0;
    for (int r = 0; r < 64; r++) begin rbase[r] = r * 16; rsize[r] = 16; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) probe();
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      cfg_we = 1; cfg_region = 6'($urandom);
      cfg_size_m1 = ($urandom % 4 == 0) ? 9'd0 : 9'($urandom);
      cfg_base = 10'($urandom % (1024 - cfg_size_m1));
      rbase[cfg_region] = cfg_base; rsize[cfg_region] = cfg_size_m1 + 1;
      @(negedge clk); cfg_we = 0;
      for (int i = 0; i < 20; i++) probe();
      for (int r = 0; r < 64; r++)
        chk(sirt[r*19 +: 19] == {10'(rbase[r]), 9'(rsize[r] - 1)}, "table image");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
