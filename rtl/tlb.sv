// Translation-lookaside buffer of an accelerator tile.
//
// The accelerator addresses its data set in a private virtual space, counted
// in 32-bit beats. The space is cut into NPAGES pages of 2**PAGE_BITS beats;
// entry v of the table holds the physical page number of virtual page v and
// a valid bit. Entries are written from the configuration registers before
// the accelerator starts (the page table of the data set's buffer).
// Lookup is combinational, on two ports (load and store path): pa, the beats left to the end of the page
// (page_rem, so the DMA engine can split bursts at page boundaries) and a
// fault flag for an unmapped or out-of-range page.
// The paper says only that the tile wrapper has a TLB, which the p2p service
// needed "minor modifications" to; in this design p2p transfers carry no
// address and bypass it. Page size, table size and the load path are this
// design's choices.
module tlb #(
  parameter int unsigned NPAGES    = 16,
  parameter int unsigned PAGE_BITS = 10,
  parameter int unsigned PA_W      = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(NPAGES)-1:0] wr_idx,
  input  logic [PA_W-PAGE_BITS-1:0] wr_ppn,
  input  logic                      inv_all,   // clear every entry
  // two lookup ports: [0] load path, [1] store path of the DMA engine
  input  logic [1:0][31:0]          va,
  output logic [1:0][PA_W-1:0]      pa,
  output logic [1:0][PAGE_BITS:0]   page_rem,
  output logic [1:0]                fault
);
  localparam int unsigned PPN_W = PA_W - PAGE_BITS;

  logic [PPN_W-1:0] ppn_q [NPAGES];
  logic [NPAGES-1:0] vld_q;

  for (genvar p = 0; p < 2; p++) begin : g_port
    logic [31-PAGE_BITS:0] vpn;
    logic [PAGE_BITS-1:0]  off;
    assign vpn = va[p][31:PAGE_BITS];
    assign off = va[p][PAGE_BITS-1:0];
    always_comb begin
      fault[p]    = (32'(vpn) >= NPAGES) || !vld_q[vpn[$clog2(NPAGES)-1:0]];
      pa[p]       = {ppn_q[vpn[$clog2(NPAGES)-1:0]], off};
      page_rem[p] = (PAGE_BITS+1)'(1 << PAGE_BITS) - (PAGE_BITS+1)'(off);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else if (inv_all) vld_q <= '0;
    else if (wr_en) vld_q[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) ppn_q[wr_idx] <= wr_ppn;
  end
endmodule
