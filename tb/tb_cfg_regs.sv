// Self-checking test of cfg_regs: read-back of every writable register,
// the read-only tile location, the start / invalidate / interrupt-ack
// pulses, page-table writes, the decoded p2p fields and the weight port
// with its auto-incrementing address.
module tb_cfg_regs;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bus_valid = 0, bus_we = 0, bus_rvalid;
  logic [7:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic running = 0, irq = 0, tlb_fault = 0;
  logic [15:0] n_done = 0;
  logic start, ack, tlb_we, tlb_inv, wt_we;
  p2p_cfg_t p2p;
  logic [31:0] n_chunks, conf_size;
  logic [3:0] tlb_idx;
  logic [13:0] tlb_ppn;
  logic [2:0] wt_layer;
  logic [19:0] wt_addr;
  logic [15:0] wt_data;

  cfg_regs #(.X(2), .Y(3), .NPAGES(16), .PPN_W(14)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // drive one write; the pulse outputs are checked while the write is on the bus
  task automatic wr(input int a, input logic [31:0] d);
    bus_valid = 1; bus_we = 1; bus_addr = 8'(a); bus_wdata = d;
    #1;
    chk(start   == (a == REG_CMD && d[0]),  "start pulse");
    chk(tlb_inv == (a == REG_CMD && d[1]),  "invalidate pulse");
    chk(ack     == (a == REG_IRQ_ACK),      "ack pulse");
    chk(tlb_we  == (a >= REG_TLB_BASE && a < REG_TLB_BASE + 16), "page-table write");
    chk(wt_we   == (a == REG_WT_DATA),      "weight write");
    @(negedge clk);
    bus_valid = 0; bus_we = 0;
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    bus_valid = 1; bus_we = 0; bus_addr = 8'(a);
    @(negedge clk);
    bus_valid = 0;
    chk(bus_rvalid, "rvalid");
    d = bus_rdata;
    @(negedge clk);
    chk(!bus_rvalid, "rvalid one cycle");
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    chk(n_chunks == 1 && conf_size == 0, "reset values");
    rd(REG_LOCATION, d);  chk(d == {16'd3, 16'd2}, "location");
    wr(REG_LOCATION, 32'hffff_ffff);
    rd(REG_LOCATION, d);  chk(d == {16'd3, 16'd2}, "location is read-only");
    for (int k = 0; k < 20; k++) begin
      logic [31:0] v;
      v = $urandom;
      wr(REG_N_CHUNKS, v);  rd(REG_N_CHUNKS, d);  chk(d == v && n_chunks == v, "n_chunks");
      v = $urandom;
      wr(REG_CONF_SIZE, v); rd(REG_CONF_SIZE, d); chk(d == v && conf_size == v, "conf_size");
    end
    // p2p register: store/load enables, source count and coordinates
    for (int k = 0; k < 20; k++) begin
      logic [31:0] v;
      v = $urandom & 32'h0fff_ffff;
      wr(REG_P2P, v); rd(REG_P2P, d); chk(d == v, "p2p read-back");
      chk(p2p.store_en == v[0] && p2p.load_en == v[1] && p2p.nsrc_m1 == v[3:2], "p2p enables");
      for (int s = 0; s < 4; s++)
        chk(p2p.src_x[s] == v[4+6*s +: 3] && p2p.src_y[s] == v[7+6*s +: 3], "p2p source");
    end
    // command pulses and status
    wr(REG_CMD, 32'd1); wr(REG_CMD, 32'd2); wr(REG_CMD, 32'd3); wr(REG_IRQ_ACK, 0);
    running = 1; irq = 0; tlb_fault = 1; n_done = 16'd77;
    rd(REG_STATUS, d); chk(d == {16'd77, 13'd0, 1'b1, 1'b0, 1'b1}, "status");
    // page table
    for (int p = 0; p < 16; p++) begin
      bus_valid = 1; bus_we = 1; bus_addr = 8'(REG_TLB_BASE + p); bus_wdata = 32'(p * 5 + 1);
      #1;
      chk(tlb_we && tlb_idx == 4'(p) && tlb_ppn == 14'(p * 5 + 1), "page-table fields");
      @(negedge clk);
      bus_valid = 0;
    end
    // weight port
    wr(REG_WT_ADDR, {9'd0, 3'd2, 20'd100});
    for (int k = 0; k < 10; k++) begin
      bus_valid = 1; bus_we = 1; bus_addr = REG_WT_DATA; bus_wdata = 32'(k + 500);
      #1;
      chk(wt_we && wt_layer == 3'd2 && wt_addr == 20'(100 + k) && wt_data == 16'(k + 500), "weight write fields");
      @(negedge clk);
      bus_valid = 0;
    end
    rd(REG_WT_ADDR, d); chk(d == {9'd0, 3'd2, 20'd110}, "weight pointer");
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
