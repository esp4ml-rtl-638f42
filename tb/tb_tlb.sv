// Self-checking test of tlb: writes a scattered page table, then checks
// translation, beats-to-page-end and faults on both lookup ports against a
// table kept by the test, including unmapped and out-of-range pages and
// the invalidate-all command.
module tb_tlb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NP = 16, PB = 10, PA_W = 24;

  logic wr_en = 0, inv_all = 0;
  logic [3:0] wr_idx = 0;
  logic [PA_W-PB-1:0] wr_ppn = 0;
  logic [1:0][31:0] va;
  logic [1:0][PA_W-1:0] pa;
  logic [1:0][PB:0] page_rem;
  logic [1:0] fault;
  int ppn [NP];
  bit vld [NP];

  tlb #(.NPAGES(NP), .PAGE_BITS(PB), .PA_W(PA_W)) dut (.*);

  task automatic check(input int p);
    for (int k = 0; k < 40; k++) begin
      int v, off;
      v   = $urandom_range(0, NP + 3);
      off = $urandom_range(0, (1 << PB) - 1);
      va[p] = 32'((v << PB) | off);
      #1;
      checks++;
      if (v >= NP || !vld[v]) begin
        if (!fault[p]) begin failures++; $display("FAIL no fault for page %0d", v); end
      end else if (fault[p] || pa[p] != PA_W'((ppn[v] << PB) | off)
                   || page_rem[p] != (PB+1)'((1 << PB) - off)) begin
        failures++; $display("FAIL port %0d va %h -> pa %h rem %0d", p, va[p], pa[p], page_rem[p]);
      end
    end
  endtask

  initial begin
    va = '0;
    for (int i = 0; i < NP; i++) vld[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NP; i++) begin
      if (i == 5) continue;           // page 5 stays unmapped
      @(negedge clk);
      ppn[i] = $urandom_range(0, (1 << (PA_W - PB)) - 1);
      vld[i] = 1;
      wr_en = 1; wr_idx = 4'(i); wr_ppn = (PA_W-PB)'(ppn[i]);
      @(negedge clk);
      wr_en = 0;
    end
    check(0);
    check(1);
    @(negedge clk);
    inv_all = 1;
    @(negedge clk);
    inv_all = 0;
    for (int i = 0; i < NP; i++) vld[i] = 0;
    check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
