// tb_dual_pt_select: checks the private-range classification, page-table
// root selection, and that an empty range turns the mechanism off.
module tb_dual_pt_select;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic cfg_we; logic [1:0] cfg_sel; logic [XLEN-1:0] cfg_wdata, va, pt_root;
  logic is_private, mech_en;
  int checks = 0, failures = 0;

  dual_pt_select dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [1:0] s, input logic [XLEN-1:0] v);
    @(negedge clk); cfg_we = 1; cfg_sel = s; cfg_wdata = v; @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    logic [XLEN-1:0] base, mask;
    cfg_we = 0; cfg_sel = 0; cfg_wdata = 0; va = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      va = {$urandom, $urandom}; #1;
      chk(!mech_en && !is_private, "reset: empty range, nothing private");
    end
    wr(2, 64'h8000_1000); wr(3, 64'h8000_2000);
    for (int r = 0; r < 4; r++) begin
      int sh;
      sh = $urandom_range(20, 36);
      mask = ~((64'd1 << sh) - 1);
      base = {$urandom, $urandom} & mask;
      wr(1, mask); wr(0, base);
      for (int i = 0; i < 300; i++) begin
        va = (i % 2) ? (base | (64'($urandom) & ~mask)) : {$urandom, $urandom};
        #1;
        chk(mech_en, "range set");
        chk(is_private == ((va & mask) == base), "classification");
        chk(pt_root == (((va & mask) == base) ? 64'h8000_1000 : 64'h8000_2000), "page-table root");
      end
    end
    wr(0, 64'h1);  // bit outside the mask: empty range
    va = 64'h1; #1;
    chk(!mech_en && !is_private && pt_root == 64'h8000_2000, "empty range disables the mechanism");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
