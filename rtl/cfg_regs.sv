// Memory-mapped configuration registers of an accelerator tile.
//
// A simple register bus (valid, we, word address, 32-bit data; read data
// one cycle after a read, with rvalid) reaches the registers of
// esp_pkg::REG_*. Two of them are the ones the paper adds to every
// accelerator: LOCATION_REG, read-only, returns the tile's {y, x} mesh
// coordinates, and P2P_REG holds p2p-store enable, p2p-load enable, the
// number of load sources (1 to 4) and their coordinates. The others hold
// the accelerator's own settings (n_chunks, conf_size), the TLB page table
// and a weight-loading window (WT_ADDR, WT_DATA with auto-increment).
// Writing 1 to CMD gives a one-cycle start pulse; writing IRQ_ACK gives an
// ack pulse. Register addresses and bit layouts are this design's choices;
// the paper lists the contents of P2P_REG but not its layout.
module cfg_regs
  import esp_pkg::*;
#(
  parameter int unsigned X         = 0,
  parameter int unsigned Y         = 0,
  parameter int unsigned NPAGES    = 16,
  parameter int unsigned PPN_W     = 14
) (
  input  logic        clk,
  input  logic        rst_n,
  // register bus
  input  logic        bus_valid,
  input  logic        bus_we,
  input  logic [7:0]  bus_addr,
  input  logic [31:0] bus_wdata,
  output logic        bus_rvalid,
  output logic [31:0] bus_rdata,
  // status in
  input  logic        running,
  input  logic        irq,
  input  logic        tlb_fault,
  input  logic [15:0] n_done,
  // controls out
  output logic        start,
  output logic        ack,
  output p2p_cfg_t    p2p,
  output logic [31:0] n_chunks,
  output logic [31:0] conf_size,
  output logic        tlb_we,
  output logic [$clog2(NPAGES)-1:0] tlb_idx,
  output logic [PPN_W-1:0]          tlb_ppn,
  output logic        tlb_inv,
  output logic        wt_we,
  output logic [2:0]  wt_layer,
  output logic [19:0] wt_addr,
  output logic [15:0] wt_data
);
  logic [31:0] p2p_q;
  logic [22:0] wt_ptr_q;

  wire wr = bus_valid &&  bus_we;
  wire rd = bus_valid && !bus_we;
  wire tlb_hit = (bus_addr >= REG_TLB_BASE) && (32'(bus_addr) < 32'(REG_TLB_BASE) + NPAGES);

  assign p2p      = unpack_p2p(p2p_q);
  assign start    = wr && bus_addr == REG_CMD && bus_wdata[0];
  assign ack      = wr && bus_addr == REG_IRQ_ACK;
  assign tlb_we   = wr && tlb_hit;
  assign tlb_idx  = $clog2(NPAGES)'(bus_addr - REG_TLB_BASE);
  assign tlb_ppn  = bus_wdata[PPN_W-1:0];
  assign tlb_inv  = wr && bus_addr == REG_CMD && bus_wdata[1];
  assign wt_we    = wr && bus_addr == REG_WT_DATA;
  assign wt_layer = wt_ptr_q[22:20];
  assign wt_addr  = wt_ptr_q[19:0];
  assign wt_data  = bus_wdata[15:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p2p_q      <= '0;
      n_chunks   <= 32'd1;
      conf_size  <= '0;
      wt_ptr_q   <= '0;
      bus_rvalid <= 1'b0;
      bus_rdata  <= '0;
    end else begin
      if (wr) begin
        unique case (bus_addr)
          REG_P2P:       p2p_q     <= bus_wdata;
          REG_N_CHUNKS:  n_chunks  <= bus_wdata;
          REG_CONF_SIZE: conf_size <= bus_wdata;
          REG_WT_ADDR:   wt_ptr_q  <= bus_wdata[22:0];
          REG_WT_DATA:   wt_ptr_q  <= {wt_ptr_q[22:20], wt_ptr_q[19:0] + 20'd1};
          default: ;
        endcase
      end
      bus_rvalid <= rd;
      if (rd) begin
        unique case (bus_addr)
          REG_STATUS:    bus_rdata <= {n_done, 13'd0, tlb_fault, irq, running};
          REG_LOCATION:  bus_rdata <= {16'(Y), 16'(X)};
          REG_P2P:       bus_rdata <= p2p_q;
          REG_N_CHUNKS:  bus_rdata <= n_chunks;
          REG_CONF_SIZE: bus_rdata <= conf_size;
          REG_WT_ADDR:   bus_rdata <= {9'd0, wt_ptr_q};
          default:       bus_rdata <= '0;
        endcase
      end
    end
  end
endmodule
