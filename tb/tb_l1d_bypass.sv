// tb_l1d_bypass: random loads and stores of 1/2/4/8 bytes, naturally
// aligned, some to the enclave's private range and some to shared memory.
// Behavioural L1 and LLC models (with random delays) stand behind the block.
// Checks that shared enclave accesses go to the LLC and everything else to
// the L1, that LLC stores carry the right byte enables and shifted data,
// that loads return the right bytes zero-extended, and that the ROB tag
// comes back with the result.
module tb_l1d_bypass;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic [CORE_W-1:0] core_id = 1'b1;
  logic in_valid, in_ready, in_private, mech_en; mem_uop_t in_uop; logic [PADDR_W-1:0] in_pa;
  logic l1_req_valid, l1_req_ready, l1_resp_valid; logic [PADDR_W-1:0] l1_req_pa; mem_uop_t l1_req_uop;
  logic [XLEN-1:0] l1_resp_data;
  logic llc_req_valid, llc_req_ready, llc_resp_valid; llc_req_t llc_req; llc_resp_t llc_resp;
  logic resp_valid, bypassed; logic [XLEN-1:0] resp_data; logic [ROB_TAG_W-1:0] resp_rob_tag;
  int checks = 0, failures = 0;
  int n_byp = 0, n_l1 = 0;
  logic [7:0] mem [logic [PADDR_W-1:0]];   // byte image behind the LLC
  l1d_bypass dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] mb(input logic [PADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : a[7:0] ^ 8'h5A;
  endfunction

  initial begin
    mem_uop_t u; logic [PADDR_W-1:0] pa; logic pv, me, exp_byp; int nb; logic [XLEN-1:0] exp_d;
    in_valid = 0; in_uop = '0; in_pa = 0; in_private = 0; mech_en = 0;
    l1_req_ready = 0; l1_resp_valid = 0; l1_resp_data = 0; llc_req_ready = 0; llc_resp_valid = 0; llc_resp = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      u = '0; u.is_store = 1'($urandom); u.size = 2'($urandom); u.rob_tag = 6'($urandom);
      u.sdata = {$urandom, $urandom};
      nb = 1 << u.size;
      pa = DRAM_BASE + 56'(($urandom % 256) * nb);
      pv = 1'($urandom); me = ($urandom % 4 != 0);
      exp_byp = me && !pv;
      @(negedge clk);
      chk(in_ready, "idle between accesses");
      in_valid = 1; in_uop = u; in_pa = pa; in_private = pv; mech_en = me; #1;
      chk(bypassed == exp_byp, "bypass decision");
      @(negedge clk); in_valid = 0;
      chk(!in_ready, "busy while an access is outstanding");
      exp_d = '0;
      for (int b = 0; b < nb; b++) exp_d[b*8 +: 8] = mb(pa + 56'(b));
      repeat ($urandom % 4) @(negedge clk);
      if (exp_byp) begin
        n_byp++;
        #1 chk(llc_req_valid && !l1_req_valid, "routed to LLC");
        chk(llc_req.core == core_id && llc_req.src == 1 && llc_req.write == u.is_store &&
            llc_req.laddr == pa[55:6], "LLC request fields");
        if (u.is_store) begin
          logic [63:0] ebe; ebe = ((64'd1 << nb) - 1) << pa[5:0];
          chk(llc_req.be == ebe, "byte enables");
          for (int b = 0; b < 64; b++) if (ebe[b]) begin
            chk(llc_req.data[b*8 +: 8] == u.sdata[(b - pa[5:0])*8 +: 8], "store data placement");
          end
          for (int b = 0; b < nb; b++) mem[pa + 56'(b)] = u.sdata[b*8 +: 8];
        end
        llc_req_ready = 1; @(negedge clk); llc_req_ready = 0;
        repeat ($urandom % 6) begin #1 chk(!resp_valid, "no result before LLC answers"); @(negedge clk); end
        llc_resp_valid = 1; llc_resp.core = core_id; llc_resp.src = 1; llc_resp.write = u.is_store;
        for (int b = 0; b < 64; b++) llc_resp.data[b*8 +: 8] = mb({pa[55:6], 6'(b)});
        #1;
        chk(resp_valid && resp_rob_tag == u.rob_tag, "result with ROB tag");
        if (!u.is_store) chk(resp_data == exp_d, "load data extracted and zero-extended");
        @(negedge clk); llc_resp_valid = 0;
      end else begin
        n_l1++;
        #1 chk(l1_req_valid && !llc_req_valid && l1_req_pa == pa && l1_req_uop == u, "routed to L1");
        l1_req_ready = 1; @(negedge clk); l1_req_ready = 0;
        repeat ($urandom % 3) @(negedge clk);
        l1_resp_valid = 1; l1_resp_data = {$urandom, $urandom}; #1;
        chk(resp_valid && resp_data == l1_resp_data && resp_rob_tag == u.rob_tag, "L1 result passed back");
        @(negedge clk); l1_resp_valid = 0;
      end
    end
    chk(n_byp > 300 && n_l1 > 300, "both paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
