// Tile-based SoC with reconfigurable accelerator pipelines: the
// "multi-tile classifier" instance, a 4 x 4 mesh.
//
// Floorplan (x to the right, y downwards; Cn = stage n of the classifier
// split over five accelerators, one dense layer each):
//     y=0:  C2   C3   C4   aux
//     y=1:  C1   mem  C5   -
//     y=2:  C5   cpu  C1   -
//     y=3:  C4   C3   C2   -
// so the SoC holds two complete five-stage pipelines (10 accelerators),
// one memory tile, a processor tile and an auxiliary tile; "-" is empty.
//
// Two NoC planes (noc_mesh) join the tiles: the DMA request plane and the
// DMA response plane. Accelerator tiles move data by DMA to and from the
// memory tile, or directly from tile to tile with the on-demand p2p
// service, as P2P_REG of each tile selects. Software reconfigures a
// pipeline only through these registers: a chain of p2p links, plain DMA
// through memory, or several producers feeding one consumer.
//
// Ports. The processor (not part of this RTL) reaches the tiles' registers
// through cfg_* (cfg_tile picks the tile, read data one cycle later on
// cfg_rvalid / cfg_rdata) and receives one interrupt per tile on irq.
// The memory tile's memory port is mem_* (the DRAM controller is outside).
// The two planes' local ports of the processor, auxiliary and empty tiles
// are brought out as ext_*; ev_* are per-tile event pulses for monitoring.
// TILE_TYPE and the TILE_* arrays can describe other floorplans, e.g. the
// paper's other SoC with whole classifiers and a denoiser.
// The floorplan and the stage split follow the paper's figure of the two
// SoCs; which layer each stage holds is this design's reading of it.
module esp_soc
  import esp_pkg::*;
#(
  parameter int unsigned MX    = 4,
  parameter int unsigned MY    = 4,
  parameter int unsigned MEM_X = 1,
  parameter int unsigned MEM_Y = 1,
  parameter int unsigned PA_W  = 24,
  parameter int unsigned PAGE_BITS = 10,
  parameter int unsigned NOC_DEPTH = 4,
  localparam int unsigned NT   = MX * MY,
  parameter tile_t [0:NT-1] TILE_TYPE = '{
      T_ACC, T_ACC, T_ACC, T_AUX,
      T_ACC, T_MEM, T_ACC, T_EMPTY,
      T_ACC, T_CPU, T_ACC, T_EMPTY,
      T_ACC, T_ACC, T_ACC, T_EMPTY},
  parameter logic [0:NT-1][2:0] TILE_NL = '{
      3'd1, 3'd1, 3'd1, 3'd1,
      3'd1, 3'd1, 3'd1, 3'd1,
      3'd1, 3'd1, 3'd1, 3'd1,
      3'd1, 3'd1, 3'd1, 3'd1},
  parameter dims_t [0:NT-1] TILE_DIMS = '{
      C2_DIMS, C3_DIMS, C4_DIMS, NO_DIMS,
      C1_DIMS, NO_DIMS, C5_DIMS, NO_DIMS,
      C5_DIMS, NO_DIMS, C1_DIMS, NO_DIMS,
      C4_DIMS, C3_DIMS, C2_DIMS, NO_DIMS},
  parameter reuse_t [0:NT-1] TILE_REUSE = '{
      C2_REUSE, C3_REUSE, C4_REUSE, NO_REUSE,
      C1_REUSE, NO_REUSE, C5_REUSE, NO_REUSE,
      C5_REUSE, NO_REUSE, C1_REUSE, NO_REUSE,
      C4_REUSE, C3_REUSE, C2_REUSE, NO_REUSE},
  parameter relu_t [0:NT-1] TILE_RELU = '{
      HID_RELU, HID_RELU, HID_RELU, OUT_RELU,
      HID_RELU, OUT_RELU, OUT_RELU, OUT_RELU,
      OUT_RELU, OUT_RELU, HID_RELU, OUT_RELU,
      HID_RELU, HID_RELU, HID_RELU, OUT_RELU}
) (
  input  logic                clk,
  input  logic                rst_n,
  // register access and interrupts (processor side)
  input  logic                cfg_valid,
  input  logic                cfg_we,
  input  logic [3:0]          cfg_tile,
  input  logic [7:0]          cfg_addr,
  input  logic [31:0]         cfg_wdata,
  output logic                cfg_rvalid,
  output logic [31:0]         cfg_rdata,
  output logic [NT-1:0]       irq,
  // memory port of the memory tile
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_req_we,
  output logic [PA_W-1:0]     mem_req_addr,
  output logic [NOC_W-1:0]    mem_req_wdata,
  input  logic                mem_rvalid,
  input  logic [NOC_W-1:0]    mem_rdata,
  // local NoC ports of tiles not built here (processor, auxiliary, empty)
  input  logic  [NT-1:0]      ext_req_in_valid,
  output logic  [NT-1:0]      ext_req_in_ready,
  input  flit_t [NT-1:0]      ext_req_in_flit,
  output logic  [NT-1:0]      ext_req_out_valid,
  input  logic  [NT-1:0]      ext_req_out_ready,
  output flit_t [NT-1:0]      ext_req_out_flit,
  input  logic  [NT-1:0]      ext_rsp_in_valid,
  output logic  [NT-1:0]      ext_rsp_in_ready,
  input  flit_t [NT-1:0]      ext_rsp_in_flit,
  output logic  [NT-1:0]      ext_rsp_out_valid,
  input  logic  [NT-1:0]      ext_rsp_out_ready,
  output flit_t [NT-1:0]      ext_rsp_out_flit,
  // per-tile event pulses
  output logic  [NT-1:0]      ev_p2p_req_sent,
  output logic  [NT-1:0]      ev_p2p_req_served,
  output logic  [NT-1:0]      ev_dma_read,
  output logic  [NT-1:0]      ev_dma_write,
  output logic  [NT-1:0]      ev_done
);
  // tile side of each plane's local port (into / out of the mesh)
  logic  [NT-1:0] q_in_v, q_in_r, q_out_v, q_out_r;
  flit_t [NT-1:0] q_in_f, q_out_f;
  logic  [NT-1:0] s_in_v, s_in_r, s_out_v, s_out_r;
  flit_t [NT-1:0] s_in_f, s_out_f;

  noc_mesh #(.MX(MX), .MY(MY), .DEPTH(NOC_DEPTH)) u_req_plane (
    .clk, .rst_n,
    .l_in_valid(q_in_v), .l_in_ready(q_in_r), .l_in_flit(q_in_f),
    .l_out_valid(q_out_v), .l_out_ready(q_out_r), .l_out_flit(q_out_f)
  );
  noc_mesh #(.MX(MX), .MY(MY), .DEPTH(NOC_DEPTH)) u_rsp_plane (
    .clk, .rst_n,
    .l_in_valid(s_in_v), .l_in_ready(s_in_r), .l_in_flit(s_in_f),
    .l_out_valid(s_out_v), .l_out_ready(s_out_r), .l_out_flit(s_out_f)
  );

  logic [NT-1:0]        t_rvalid;
  logic [NT-1:0][31:0]  t_rdata;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam int unsigned TX = t % MX;
    localparam int unsigned TY = t / MX;
    if (TILE_TYPE[t] == T_ACC) begin : g_acc
      wire sel = cfg_valid && (32'(cfg_tile) == t);
      acc_tile #(
        .X(TX), .Y(TY), .MEM_X(MEM_X), .MEM_Y(MEM_Y),
        .NL(TILE_NL[t]), .DIMS(TILE_DIMS[t]), .REUSE(TILE_REUSE[t]), .RELU(TILE_RELU[t]),
        .PA_W(PA_W), .PAGE_BITS(PAGE_BITS)
      ) u_acc (
        .clk, .rst_n,
        .bus_valid(sel), .bus_we(cfg_we), .bus_addr(cfg_addr), .bus_wdata(cfg_wdata),
        .bus_rvalid(t_rvalid[t]), .bus_rdata(t_rdata[t]), .irq(irq[t]),
        .req_out_valid(q_in_v[t]), .req_out_ready(q_in_r[t]), .req_out_flit(q_in_f[t]),
        .req_in_valid(q_out_v[t]), .req_in_ready(q_out_r[t]), .req_in_flit(q_out_f[t]),
        .rsp_out_valid(s_in_v[t]), .rsp_out_ready(s_in_r[t]), .rsp_out_flit(s_in_f[t]),
        .rsp_in_valid(s_out_v[t]), .rsp_in_ready(s_out_r[t]), .rsp_in_flit(s_out_f[t]),
        .ev_p2p_req_sent(ev_p2p_req_sent[t]), .ev_p2p_req_served(ev_p2p_req_served[t]),
        .ev_dma_read(ev_dma_read[t]), .ev_dma_write(ev_dma_write[t]), .ev_done(ev_done[t])
      );
    end else begin : g_noacc
      assign t_rvalid[t] = 1'b0;
      assign t_rdata[t]  = '0;
      assign irq[t]      = 1'b0;
      assign ev_p2p_req_sent[t]   = 1'b0;
      assign ev_p2p_req_served[t] = 1'b0;
      assign ev_dma_read[t]       = 1'b0;
      assign ev_dma_write[t]      = 1'b0;
      assign ev_done[t]           = 1'b0;
    end

    if (TILE_TYPE[t] == T_MEM) begin : g_mem
      mem_tile #(.X(TX), .Y(TY), .PA_W(PA_W)) u_mem (
        .clk, .rst_n,
        .req_in_valid(q_out_v[t]), .req_in_ready(q_out_r[t]), .req_in_flit(q_out_f[t]),
        .rsp_out_valid(s_in_v[t]), .rsp_out_ready(s_in_r[t]), .rsp_out_flit(s_in_f[t]),
        .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
        .mem_rvalid, .mem_rdata
      );
      // the memory tile never sends requests nor takes responses
      assign q_in_v[t]  = 1'b0;
      assign q_in_f[t]  = '0;
      assign s_out_r[t] = 1'b1;
      a_mem_no_rsp_in: assert property (@(posedge clk) disable iff (!rst_n) !s_out_v[t]);
    end

    if (TILE_TYPE[t] != T_ACC && TILE_TYPE[t] != T_MEM) begin : g_ext
      assign q_in_v[t]  = ext_req_in_valid[t];
      assign q_in_f[t]  = ext_req_in_flit[t];
      assign q_out_r[t] = ext_req_out_ready[t];
      assign s_in_v[t]  = ext_rsp_in_valid[t];
      assign s_in_f[t]  = ext_rsp_in_flit[t];
      assign s_out_r[t] = ext_rsp_out_ready[t];
      assign ext_req_in_ready[t]  = q_in_r[t];
      assign ext_req_out_valid[t] = q_out_v[t];
      assign ext_req_out_flit[t]  = q_out_f[t];
      assign ext_rsp_in_ready[t]  = s_in_r[t];
      assign ext_rsp_out_valid[t] = s_out_v[t];
      assign ext_rsp_out_flit[t]  = s_out_f[t];
    end else begin : g_noext
      assign ext_req_in_ready[t]  = 1'b0;
      assign ext_req_out_valid[t] = 1'b0;
      assign ext_req_out_flit[t]  = '0;
      assign ext_rsp_in_ready[t]  = 1'b0;
      assign ext_rsp_out_valid[t] = 1'b0;
      assign ext_rsp_out_flit[t]  = '0;
    end
  end

  if (TILE_TYPE[MEM_Y*MX+MEM_X] != T_MEM) begin : g_no_mem
    // without a memory tile nothing drives the memory port
    assign mem_req_valid = 1'b0;
    assign mem_req_we    = 1'b0;
    assign mem_req_addr  = '0;
    assign mem_req_wdata = '0;
  end

  // read data of the addressed tile
  always_comb begin
    cfg_rvalid = 1'b0;
    cfg_rdata  = '0;
    for (int t = 0; t < NT; t++) begin
      if (t_rvalid[t]) begin
        cfg_rvalid = 1'b1;
        cfg_rdata  = t_rdata[t];
      end
    end
  end
endmodule
