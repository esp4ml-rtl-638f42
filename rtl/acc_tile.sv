// Accelerator tile: one HLS-flow accelerator in its tile wrapper.
//
// Contents: the configuration registers (cfg_regs), the interrupt logic
// (irq_ctrl), the TLB, the DMA engine with the p2p service, the ap_fifo
// adapter (hls_adapter) and the accelerator itself (hls_acc_top running an
// mlp_kernel). The tile sits on two NoC planes, the DMA request plane and
// the DMA response plane; for plain DMA it only sends on the first and
// receives on the second, and p2p uses the other two directions.
// Software (on the register bus) loads weights and the page table, sets
// n_chunks, conf_size and P2P_REG, writes CMD to start, and waits for irq.
// The parameters NL, DIMS, REUSE and RELU pick the network the accelerator
// computes (see mlp_kernel).
// The set of parts follows the paper's picture of the accelerator tile;
// the private cache and the coherence and IO/IRQ planes are left out
// (interrupt and register bus are plain wires here).
module acc_tile
  import esp_pkg::*;
#(
  parameter int unsigned X         = 0,
  parameter int unsigned Y         = 0,
  parameter int unsigned MEM_X     = 1,
  parameter int unsigned MEM_Y     = 1,
  parameter int unsigned NL        = 5,
  parameter logic [0:5][15:0] DIMS  = '{16'd1024, 16'd256, 16'd128, 16'd64, 16'd32, 16'd10},
  parameter logic [0:4][15:0] REUSE = '{16'd4096, 16'd4096, 16'd4096, 16'd2048, 16'd320},
  parameter logic [0:4]       RELU  = 5'b11110,
  parameter int unsigned NPAGES    = 16,
  parameter int unsigned PAGE_BITS = 10,
  parameter int unsigned PA_W      = 24,
  parameter int unsigned QDEPTH    = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // register bus (already decoded for this tile)
  input  logic         bus_valid,
  input  logic         bus_we,
  input  logic [7:0]   bus_addr,
  input  logic [31:0]  bus_wdata,
  output logic         bus_rvalid,
  output logic [31:0]  bus_rdata,
  output logic         irq,
  // NoC, DMA request plane
  output logic         req_out_valid,
  input  logic         req_out_ready,
  output flit_t        req_out_flit,
  input  logic         req_in_valid,
  output logic         req_in_ready,
  input  flit_t        req_in_flit,
  // NoC, DMA response plane
  output logic         rsp_out_valid,
  input  logic         rsp_out_ready,
  output flit_t        rsp_out_flit,
  input  logic         rsp_in_valid,
  output logic         rsp_in_ready,
  input  flit_t        rsp_in_flit,
  // event pulses
  output logic         ev_p2p_req_sent,
  output logic         ev_p2p_req_served,
  output logic         ev_dma_read,
  output logic         ev_dma_write,
  output logic         ev_done
);
  localparam int unsigned PPN_W = PA_W - PAGE_BITS;

  // configuration
  logic        start, ack, running, tlb_we, tlb_inv, wt_we, fault, fault_q;
  p2p_cfg_t    p2p;
  logic [31:0] n_chunks, conf_size;
  logic [$clog2(NPAGES)-1:0] tlb_idx;
  logic [PPN_W-1:0] tlb_ppn;
  logic [2:0]  wt_layer;
  logic [19:0] wt_addr;
  logic [15:0] wt_data, n_done;
  logic        acc_done, done_pend_q, dma_wr_idle, tile_done;

  cfg_regs #(.X(X), .Y(Y), .NPAGES(NPAGES), .PPN_W(PPN_W)) u_regs (
    .clk, .rst_n,
    .bus_valid, .bus_we, .bus_addr, .bus_wdata, .bus_rvalid, .bus_rdata,
    .running, .irq, .tlb_fault(fault_q), .n_done,
    .start, .ack, .p2p, .n_chunks, .conf_size,
    .tlb_we, .tlb_idx, .tlb_ppn, .tlb_inv,
    .wt_we, .wt_layer, .wt_addr, .wt_data
  );

  irq_ctrl u_irq (
    .clk, .rst_n, .start, .done(tile_done), .ack, .running, .irq, .n_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     fault_q <= 1'b0;
    else if (start) fault_q <= 1'b0;
    else if (fault) fault_q <= 1'b1;
  end

  // TLB + DMA
  logic [1:0][31:0]        tlb_va;
  logic [1:0][PA_W-1:0]    tlb_pa;
  logic [1:0][PAGE_BITS:0] tlb_rem;
  logic [1:0]              tlb_fault;

  tlb #(.NPAGES(NPAGES), .PAGE_BITS(PAGE_BITS), .PA_W(PA_W)) u_tlb (
    .clk, .rst_n, .wr_en(tlb_we), .wr_idx(tlb_idx), .wr_ppn(tlb_ppn), .inv_all(tlb_inv),
    .va(tlb_va), .pa(tlb_pa), .page_rem(tlb_rem), .fault(tlb_fault)
  );

  logic             rd_ctrl_valid, rd_ctrl_ready, rd_chnl_valid, rd_chnl_ready;
  logic             wr_ctrl_valid, wr_ctrl_ready, wr_chnl_valid, wr_chnl_ready;
  dma_ctrl_t        rd_ctrl, wr_ctrl;
  logic [NOC_W-1:0] rd_chnl_data, wr_chnl_data;

  dma_engine #(
    .X(X), .Y(Y), .MEM_X(MEM_X), .MEM_Y(MEM_Y), .PAGE_BITS(PAGE_BITS), .PA_W(PA_W)
  ) u_dma (
    .clk, .rst_n, .p2p,
    .rd_ctrl_valid, .rd_ctrl_ready, .rd_ctrl,
    .rd_chnl_valid, .rd_chnl_ready, .rd_chnl_data,
    .wr_ctrl_valid, .wr_ctrl_ready, .wr_ctrl,
    .wr_chnl_valid, .wr_chnl_ready, .wr_chnl_data, .wr_idle(dma_wr_idle),
    .tlb_va, .tlb_pa, .tlb_rem, .tlb_fault, .fault,
    .req_out_valid, .req_out_ready, .req_out_flit,
    .req_in_valid, .req_in_ready, .req_in_flit,
    .rsp_out_valid, .rsp_out_ready, .rsp_out_flit,
    .rsp_in_valid, .rsp_in_ready, .rsp_in_flit,
    .ev_p2p_req_sent, .ev_p2p_req_served, .ev_dma_read, .ev_dma_write
  );

  // adapter + accelerator
  logic             ap_start, ap_done;
  logic [31:0]      a_conf_size, a_n_chunks;
  dma_ctrl_t        load_ctrl_din, store_ctrl_din;
  logic             load_ctrl_full_n, load_ctrl_write, in1_empty_n, in1_read;
  logic             store_ctrl_full_n, store_ctrl_write, out_full_n, out_write;
  logic [NOC_W-1:0] in1_dout, out_din;

  hls_adapter #(.DEPTH(QDEPTH)) u_adapter (
    .clk, .rst_n,
    .start, .cfg_conf_size(conf_size), .cfg_n_chunks(n_chunks), .acc_done,
    .rd_ctrl_valid, .rd_ctrl_ready, .rd_ctrl,
    .rd_chnl_valid, .rd_chnl_ready, .rd_chnl_data,
    .wr_ctrl_valid, .wr_ctrl_ready, .wr_ctrl,
    .wr_chnl_valid, .wr_chnl_ready, .wr_chnl_data,
    .ap_start, .ap_done, .conf_size(a_conf_size), .n_chunks(a_n_chunks),
    .load_ctrl_din, .load_ctrl_full_n, .load_ctrl_write,
    .in1_dout, .in1_empty_n, .in1_read,
    .store_ctrl_din, .store_ctrl_full_n, .store_ctrl_write,
    .out_din, .out_full_n, .out_write
  );

  hls_acc_top #(.NL(NL), .DIMS(DIMS), .REUSE(REUSE), .RELU(RELU)) u_acc (
    .ap_clk(clk), .ap_rst_n(rst_n), .ap_start, .ap_done, .ap_idle(),
    .conf_size(a_conf_size), .n_chunks(a_n_chunks),
    .load_ctrl_din, .load_ctrl_full_n, .load_ctrl_write,
    .in1_dout, .in1_empty_n, .in1_read,
    .store_ctrl_din, .store_ctrl_full_n, .store_ctrl_write,
    .out_din, .out_full_n, .out_write,
    .wt_we, .wt_layer, .wt_addr, .wt_data
  );

  // The run ends when the accelerator is done and its last store has left
  // the tile, so that software never reads an output still in a queue.
  assign tile_done = done_pend_q && dma_wr_idle && !wr_ctrl_valid && !wr_chnl_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         done_pend_q <= 1'b0;
    else if (acc_done)  done_pend_q <= 1'b1;
    else if (tile_done) done_pend_q <= 1'b0;
  end
  assign ev_done = tile_done;
endmodule
