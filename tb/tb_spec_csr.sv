// tb_spec_csr: self-checking test of the MSPEC speculation-control CSR.
// Checks the Safe-mode reset state, Burst mode decoding, the barrier pulse,
// machine-mode override, the NOSPEC/NOTRAIN/NOPRED fields and that writes to
// other CSR numbers are ignored, then 500 random writes at random privilege
// levels against a reference decode.
module tb_spec_csr;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic csr_we; logic [11:0] csr_addr; logic [XLEN-1:0] csr_wdata, csr_rdata;
  priv_e priv; spec_ctrl_t ctrl; logic burst, barrier;
  int checks = 0, failures = 0;

  spec_csr dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [4:0] v);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = XLEN'(v);
    #1 chk(barrier == (a == CSR_MSPEC), "barrier pulses only on an MSPEC write");
    @(negedge clk); csr_we = 0; csr_addr = CSR_MSPEC;
    #1 chk(!barrier, "barrier is one cycle");
  endtask

  initial begin
    csr_we = 0; csr_addr = CSR_MSPEC; csr_wdata = 0; priv = PRIV_U;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    chk(ctrl == '{1,1,1,1,1,0} && !burst, "reset: Safe mode, predictors on");
    chk(csr_rdata == 0, "reset value 0");
    wr(CSR_MSPEC, BURST_ON);
    chk(burst && !ctrl.btb_en && !ctrl.ras_en && !ctrl.bht_en, "Burst: BTB/RAS/BHT off");
    chk(!ctrl.delay_shared && !ctrl.spec_disable, "Burst: shared accesses pipelined");
    chk(csr_rdata == 64'd1, "read back BURST_ON");
    priv = PRIV_M; #1;
    chk(ctrl.spec_disable && !burst && ctrl.delay_shared, "M-mode: no speculation, Burst ignored");
    priv = PRIV_S; #1;
    wr(12'h300, 5'b11111);
    chk(csr_rdata == 64'd1 && burst, "other CSR number ignored");
    wr(CSR_MSPEC, BURST_OFF);
    chk(!burst && ctrl.btb_en && ctrl.delay_shared, "BURST_OFF restores Safe mode");
    wr(CSR_MSPEC, 5'b00010);
    chk(ctrl.spec_disable && ctrl.btb_en, "NOSPEC: all accesses wait for the head");
    wr(CSR_MSPEC, 5'b00100);
    chk(!ctrl.train_en && ctrl.btb_en, "NOTRAIN: training off, prediction on");
    wr(CSR_MSPEC, 5'b01000);
    chk(!ctrl.btb_en && !ctrl.bht_en && !ctrl.ras_en && ctrl.delay_shared, "NOPRED: pc+4 but Safe mode kept");
    // random writes and privilege levels against a reference decode
    begin
      logic [4:0] m; logic mm, b, np;
      m = 5'b01000;
      for (int i = 0; i < 500; i++) begin
        logic [11:0] a; logic [4:0] v;
        a = ($urandom % 4 == 0) ? 12'($urandom) : CSR_MSPEC; v = 5'($urandom);
        priv = ($urandom % 3 == 0) ? PRIV_M : ($urandom % 2 ? PRIV_S : PRIV_U);
        wr(a, v);
        if (a == CSR_MSPEC) m = v;
        mm = (priv == PRIV_M); b = m[0] && !mm; np = b || m[3];
        chk(csr_rdata == 64'(m), "random: read back");
        chk(burst == b && ctrl.btb_en == !np && ctrl.ras_en == !np && ctrl.bht_en == !np, "random: predictor enables");
        chk(ctrl.train_en == !m[2] && ctrl.delay_shared == !b && ctrl.spec_disable == (mm || m[1]), "random: memory controls");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
