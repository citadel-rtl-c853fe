// tb_tagged_tlb: fills the private/shared-tagged TLB with random 4 KB, 2 MB
// and 1 GB translations and compares every lookup with a reference list:
// an entry only hits for the side (private or shared) it was filled for,
// superpages keep the low virtual bits, round-robin replacement drops the
// oldest fill, and flush empties the TLB.
module tb_tagged_tlb;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1, flush = 0;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic [38:0] va; logic va_private, hit; logic [PADDR_W-1:0] pa;
  logic fill_valid = 0; logic [26:0] fill_vpn; logic fill_private; logic [1:0] fill_level; logic [43:0] fill_ppn;
  int checks = 0, failures = 0;
  tagged_tlb dut (.*);
  always #5 clk = ~clk;

  typedef struct { logic v; logic p; logic [1:0] l; logic [26:0] vpn; logic [43:0] ppn; } ref_t;
  ref_t ref_q [$];

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [26:0] lmask(input logic [1:0] l);
    return l == 0 ? 27'h7FFFFFF : l == 1 ? 27'h7FFFE00 : 27'h7FC0000;
  endfunction

  task automatic lookup(input logic [38:0] a, input logic p);
    logic eh; logic [PADDR_W-1:0] ep;
    eh = 0; ep = 0;
    foreach (ref_q[i]) if (ref_q[i].p == p && ((ref_q[i].vpn ^ a[38:12]) & lmask(ref_q[i].l)) == 0) begin
      eh = 1;
      ep = ref_q[i].l == 0 ? {ref_q[i].ppn, a[11:0]} : ref_q[i].l == 1 ? {ref_q[i].ppn[43:9], a[20:0]}
                                                                        : {ref_q[i].ppn[43:18], a[29:0]};
    end
    va = a; va_private = p; #1;
    chk(hit == eh, $sformatf("hit va=%h p=%0d", a, p));
    if (eh) chk(pa == ep, "translated address");
  endtask

  initial begin
    ref_t r;
    va = 0; va_private = 0; fill_vpn = 0; fill_private = 0; fill_level = 0; fill_ppn = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      ref_q.delete();
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      // 32 fills with distinct virtual page numbers (one per 1 GB slot, varied levels)
      for (int i = 0; i < 40; i++) begin
        r.v = 1; r.p = 1'($urandom); r.l = 2'($urandom % 3);
        r.vpn = {9'(i + round * 64), 18'($urandom)}; r.ppn = {$urandom, 12'($urandom)};
        @(negedge clk);
        fill_valid = 1; fill_vpn = r.vpn; fill_private = r.p; fill_level = r.l; fill_ppn = r.ppn;
        @(negedge clk); fill_valid = 0;
        ref_q.push_back(r);
        if (ref_q.size() > 32) void'(ref_q.pop_front());
        for (int k = 0; k < 20; k++) begin
          int j; j = $urandom % ref_q.size();
          lookup({ref_q[j].vpn ^ (27'($urandom) & ~lmask(ref_q[j].l)), 12'($urandom)}, ref_q[j].p);
          lookup({ref_q[j].vpn, 12'($urandom)}, !ref_q[j].p);
          lookup(39'({$urandom, $urandom}), 1'($urandom));
        end
      end
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0; ref_q.delete();
    for (int k = 0; k < 100; k++) lookup(39'({$urandom, $urandom}), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
