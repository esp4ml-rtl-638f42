// Shared types and constants of the tile-based SoC.
//
// The SoC is a 2D mesh of tiles joined by packet-switched NoC planes. Every
// NoC link carries flits of NOC_W data bits plus head/tail markers; the first
// flit of a packet is a header (hdr_t) naming destination and source tile,
// the message kind and a length in data beats. Accelerator data are 16-bit
// fixed-point words (FRAC fractional bits), packed two per 32-bit beat.
// Sizes that the paper prints (16-bit fixed point, 32-bit planes, 1 to 4 p2p
// sources) are used as given; the header layout, the message codes, the
// register map and the fixed-point split are this design's own choices.
package esp_pkg;

  localparam int unsigned NOC_W   = 32;  // NoC plane width ("e.g. 32 or 64 bits")
  localparam int unsigned COORD_W = 3;   // x or y coordinate, meshes up to 8 x 8
  localparam int unsigned LEN_W   = 16;  // beats per packet
  localparam int unsigned WORD_W  = 16;  // accelerator word: 16-bit fixed point
  localparam int unsigned FRAC    = 10;  // fractional bits of a word
  localparam int unsigned MAX_P2P_SRC = 4;

  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    logic             head;
    logic             tail;
    logic [NOC_W-1:0] data;
  } flit_t;

  typedef enum logic [3:0] {
    MSG_NONE      = 4'h0,
    MSG_DMA_READ  = 4'h1,  // request plane: header, address, no data
    MSG_DMA_WRITE = 4'h2,  // request plane: header, address, len data beats
    MSG_DMA_RSP   = 4'h3,  // response plane: header, len data beats (DMA or p2p data)
    MSG_P2P_REQ   = 4'h4   // request plane: single-flit p2p load request
  } msg_t;

  typedef struct packed {
    coord_t           dst_y;
    coord_t           dst_x;
    coord_t           src_y;
    coord_t           src_x;
    msg_t             msg;
    logic [LEN_W-1:0] len;
  } hdr_t;

  // Router port numbering. Row 0 is the top row; y grows southwards.
  localparam int unsigned P_N = 0, P_S = 1, P_E = 2, P_W = 3, P_L = 4;

  // DMA transaction request from the accelerator (index and length in beats).
  typedef struct packed {
    logic [31:0]      index;
    logic [LEN_W-1:0] length;
  } dma_ctrl_t;

  // Contents of P2P_REG.
  typedef struct packed {
    logic                             store_en;
    logic                             load_en;
    logic [1:0]                       nsrc_m1;  // number of sources minus one
    coord_t [MAX_P2P_SRC-1:0]         src_x;
    coord_t [MAX_P2P_SRC-1:0]         src_y;
  } p2p_cfg_t;

  // Register map of an accelerator tile (word addresses).
  localparam logic [7:0] REG_CMD       = 8'd0;   // write 1: start
  localparam logic [7:0] REG_STATUS    = 8'd1;   // [0] running [1] done/irq pending [2] tlb fault
  localparam logic [7:0] REG_IRQ_ACK   = 8'd2;   // write: clear done/irq
  localparam logic [7:0] REG_LOCATION  = 8'd3;   // read-only {y, x}
  localparam logic [7:0] REG_P2P       = 8'd4;   // P2P_REG
  localparam logic [7:0] REG_N_CHUNKS  = 8'd8;   // frames per invocation
  localparam logic [7:0] REG_CONF_SIZE = 8'd9;   // store offset (beats)
  localparam logic [7:0] REG_WT_ADDR   = 8'd10;  // {layer[22:20], address[19:0]}
  localparam logic [7:0] REG_WT_DATA   = 8'd11;  // write weight, address auto-increments
  localparam logic [7:0] REG_TLB_BASE  = 8'd16;  // page table entries from here

  // P2P_REG bit layout: [0] store_en [1] load_en [3:2] nsrc-1,
  // source k at [4+6k +: 6] = {y, x}.
  function automatic p2p_cfg_t unpack_p2p(input logic [31:0] r);
    p2p_cfg_t c;
    c.store_en = r[0];
    c.load_en  = r[1];
    c.nsrc_m1  = r[3:2];
    for (int k = 0; k < MAX_P2P_SRC; k++) begin
      c.src_x[k] = r[4+6*k +: 3];
      c.src_y[k] = r[7+6*k +: 3];
    end
    return c;
  endfunction

  function automatic flit_t make_head(input coord_t dx, input coord_t dy, input coord_t sx,
                                      input coord_t sy, input msg_t m,
                                      input logic [LEN_W-1:0] len, input logic tail);
    hdr_t h;
    flit_t f;
    h.dst_x = dx; h.dst_y = dy; h.src_x = sx; h.src_y = sy; h.msg = m; h.len = len;
    f.head = 1'b1;
    f.tail = tail;
    f.data = h;
    return f;
  endfunction

  typedef enum logic [2:0] {T_EMPTY, T_ACC, T_MEM, T_CPU, T_AUX} tile_t;

  // Accelerator settings: layer widths, reuse factor per layer, ReLU per layer.
  typedef logic [0:5][15:0] dims_t;
  typedef logic [0:4][15:0] reuse_t;
  typedef logic [0:4]       relu_t;

  // Digit classifier of the paper, 1024x256x128x64x32x10, in one accelerator.
  localparam dims_t  CLS_DIMS  = '{16'd1024, 16'd256, 16'd128, 16'd64, 16'd32, 16'd10};
  localparam reuse_t CLS_REUSE = '{16'd4096, 16'd4096, 16'd4096, 16'd2048, 16'd320};
  localparam relu_t  CLS_RELU  = 5'b11110;
  // Denoising autoencoder of the paper, 1024x256x128x1024.
  localparam dims_t  DEN_DIMS  = '{16'd1024, 16'd256, 16'd128, 16'd1024, 16'd0, 16'd0};
  localparam reuse_t DEN_REUSE = '{16'd4096, 16'd4096, 16'd4096, 16'd0, 16'd0};
  localparam relu_t  DEN_RELU  = 5'b11000;
  // The classifier split over five accelerators, one layer each (stages 1..5).
  localparam dims_t  C1_DIMS = '{16'd1024, 16'd256, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam dims_t  C2_DIMS = '{16'd256,  16'd128, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam dims_t  C3_DIMS = '{16'd128,  16'd64,  16'd0, 16'd0, 16'd0, 16'd0};
  localparam dims_t  C4_DIMS = '{16'd64,   16'd32,  16'd0, 16'd0, 16'd0, 16'd0};
  localparam dims_t  C5_DIMS = '{16'd32,   16'd10,  16'd0, 16'd0, 16'd0, 16'd0};
  localparam reuse_t C1_REUSE = '{16'd4096, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam reuse_t C2_REUSE = '{16'd4096, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam reuse_t C3_REUSE = '{16'd4096, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam reuse_t C4_REUSE = '{16'd2048, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam reuse_t C5_REUSE = '{16'd320,  16'd0, 16'd0, 16'd0, 16'd0};
  localparam relu_t  HID_RELU = 5'b10000;
  localparam relu_t  OUT_RELU = 5'b00000;
  localparam dims_t  NO_DIMS  = '{16'd2, 16'd2, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam reuse_t NO_REUSE = '{16'd2, 16'd0, 16'd0, 16'd0, 16'd0};

endpackage
