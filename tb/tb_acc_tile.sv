// Self-checking test of acc_tile: one accelerator tile (one-layer network
// 8x4, reuse factor 8, 16-beat pages) wired straight to a memory tile and
// the behavioural memory, without a mesh in between. Driven only through
// the register bus, as software would: read LOCATION_REG, fill the page
// table, load the weights, set n_chunks and conf_size, start, wait for the
// interrupt, check STATUS, acknowledge. Checked: outputs in memory against a
// fixed-point reference, interrupt and status behaviour, DMA event counts,
// and the fault flag after a load from an unmapped page.
module tb_acc_tile;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam logic [0:5][15:0] D  = '{16'd8, 16'd4, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam logic [0:4][15:0] RF = '{16'd8, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam int PB = 4, NCH = 6, CONF = 64;

  logic bus_valid = 0, bus_we = 0, bus_rvalid, irq;
  logic [7:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic req_out_valid, req_out_ready, rsp_out_valid, rsp_in_valid, rsp_in_ready, req_in_ready;
  flit_t req_out_flit, rsp_out_flit, rsp_in_flit;
  logic ev_p2p_req_sent, ev_p2p_req_served, ev_dma_read, ev_dma_write, ev_done;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rvalid;
  logic [23:0] mem_req_addr;
  logic [31:0] mem_req_wdata, mem_rdata;

  acc_tile #(.X(0), .Y(2), .MEM_X(1), .MEM_Y(1), .NL(1), .DIMS(D), .REUSE(RF), .RELU(5'b00000),
             .NPAGES(16), .PAGE_BITS(PB), .PA_W(24), .QDEPTH(2)) dut (
    .clk, .rst_n, .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rvalid, .bus_rdata, .irq,
    .req_out_valid, .req_out_ready, .req_out_flit,
    .req_in_valid(1'b0), .req_in_ready, .req_in_flit('0),
    .rsp_out_valid, .rsp_out_ready(1'b1), .rsp_out_flit,
    .rsp_in_valid, .rsp_in_ready, .rsp_in_flit,
    .ev_p2p_req_sent, .ev_p2p_req_served, .ev_dma_read, .ev_dma_write, .ev_done);

  mem_tile #(.X(1), .Y(1), .PA_W(24)) u_mem (
    .clk, .rst_n,
    .req_in_valid(req_out_valid), .req_in_ready(req_out_ready), .req_in_flit(req_out_flit),
    .rsp_out_valid(rsp_in_valid), .rsp_out_ready(rsp_in_ready), .rsp_out_flit(rsp_in_flit),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rvalid, .mem_rdata);
  dram_model #(.PA_W(24), .WORDS(1 << 12), .LAT(3), .STALL(1'b1)) u_dram (.*);

  int n_rd = 0, n_wr = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_dma_read)  n_rd++;
    if (ev_dma_write) n_wr++;
    if (ev_done)      n_done++;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    bus_valid = 1; bus_we = 1; bus_addr = 8'(a); bus_wdata = d;
    @(negedge clk);
    bus_valid = 0; bus_we = 0;
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    bus_valid = 1; bus_we = 0; bus_addr = 8'(a);
    @(negedge clk);
    bus_valid = 0;
    d = bus_rdata;
  endtask

  // virtual page v maps to physical page 2v+3
  function automatic int xlate(int va);
    return ((2 * (va >> PB) + 3) << PB) | (va & ((1 << PB) - 1));
  endfunction

  int w [36];
  function automatic logic [15:0] ref_out(int chunk, int j);
    longint acc;
    acc = longint'($signed(16'(w[32 + j]))) * 1024;
    for (int i = 0; i < 8; i++) begin
      logic [31:0] b;
      logic [15:0] x;
      b = u_dram.mem[xlate(chunk * 4 + i / 2)];
      x = (i % 2) ? b[31:16] : b[15:0];
      acc += longint'($signed(16'(w[j*8 + i]))) * longint'($signed(x));
    end
    acc = acc >>> 10;
    return acc[15:0];
  endfunction

  initial begin
    logic [31:0] d;
    int n;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    rd(REG_LOCATION, d); chk(d == {16'd2, 16'd0}, "LOCATION_REG");
    for (int p = 0; p < 8; p++) wr(REG_TLB_BASE + p, 32'(2 * p + 3));
    for (int a = 0; a < NCH * 4; a++)
      u_dram.mem[xlate(a)] = {16'($urandom_range(0, 4095) - 2048), 16'($urandom_range(0, 4095) - 2048)};
    wr(REG_WT_ADDR, 0);
    for (int k = 0; k < 36; k++) begin w[k] = $urandom_range(0, 2047) - 1024; wr(REG_WT_DATA, 32'(w[k])); end
    wr(REG_N_CHUNKS, NCH);
    wr(REG_CONF_SIZE, CONF);
    wr(REG_CMD, 1);
    rd(REG_STATUS, d); chk(d[0] && !d[1], "STATUS running, no interrupt");
    n = 0;
    while (!irq && n < 20000) begin @(negedge clk); n++; end
    chk(irq, "interrupt raised");
    rd(REG_STATUS, d); chk(!d[0] && d[1] && !d[2] && d[31:16] == 1, "STATUS done");
    for (int c = 0; c < NCH; c++)
      for (int b = 0; b < 2; b++)
        chk(u_dram.mem[xlate(CONF + c * 2 + b)] == {ref_out(c, 2*b + 1), ref_out(c, 2*b)},
            $sformatf("output chunk %0d beat %0d: %h vs %h", c, b, u_dram.mem[xlate(CONF + c * 2 + b)],
                      {ref_out(c, 2*b + 1), ref_out(c, 2*b)}));
    // one load and one store burst per chunk
    chk(n_rd == NCH && n_wr == NCH, "DMA bursts");
    chk(n_done == 1, "one done event");
    wr(REG_IRQ_ACK, 0);
    @(negedge clk);
    chk(!irq, "interrupt acknowledged");
    // unmapped page: loads from virtual page 12 raise the fault flag
    wr(REG_CMD, 2);
    for (int p = 0; p < 8; p++) wr(REG_TLB_BASE + p, 32'(2 * p + 3));
    wr(REG_N_CHUNKS, 1);
    wr(REG_CONF_SIZE, 12 << PB);
    wr(REG_CMD, 1);
    n = 0;
    while (!irq && n < 20000) begin @(negedge clk); n++; end
    rd(REG_STATUS, d); chk(d[2] && d[31:16] == 2, "fault flag after unmapped store");
    wr(REG_IRQ_ACK, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
