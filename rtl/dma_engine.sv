// DMA engine of an accelerator tile, with the on-demand point-to-point
// (p2p) service.
//
// The accelerator asks for data with load (rd_ctrl) and store (wr_ctrl)
// transactions of `length` beats at virtual beat `index`, and moves the data
// over rd_chnl / wr_chnl. The engine uses two NoC planes: the DMA request
// plane (req_*) and the DMA response plane (rsp_*).
//
// Regular DMA. A load becomes one MSG_DMA_READ packet per page-sized piece
// (header + physical address, through the TLB) sent to the memory tile; the
// data come back on the response plane. A store becomes MSG_DMA_WRITE
// packets (header, address, data) on the request plane.
//
// p2p. With load_en set in P2P_REG, a load instead sends a one-flit
// MSG_P2P_REQ to a source tile (rotating over the 1 to 4 sources of
// P2P_REG, one per load transaction) asking for exactly `length` beats; the
// data arrive on the response plane as if they were a DMA reply. With
// store_en set, a store sends nothing on its own: the engine waits for a
// MSG_P2P_REQ to arrive on the request plane and then forwards the stored
// beats to the requester on the response plane, in packets no longer than
// what the current store still has, so no packet ever waits in the NoC for
// data. Transfers are therefore initiated by the receiver, and a receiver
// asks only for what its load transaction will take (the paper's
// "consumption assumption").
// The p2p traffic uses only queues an accelerator tile has but does not use
// for DMA: the request-plane input and the response-plane output.
//
// From the paper: receiver-initiated p2p, the sender waiting for the
// request, 1 to 4 sources, reuse of unused DMA queues. This design's own:
// the packet formats, splitting at pages, the rotation over sources, the
// store path's segmentation and the arbitration of the request plane
// between load and store packets (alternating, locked for a packet).
module dma_engine
  import esp_pkg::*;
#(
  parameter int unsigned X         = 0,
  parameter int unsigned Y         = 0,
  parameter int unsigned MEM_X     = 1,
  parameter int unsigned MEM_Y     = 1,
  parameter int unsigned PAGE_BITS = 10,
  parameter int unsigned PA_W      = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  p2p_cfg_t           p2p,
  // accelerator side
  input  logic               rd_ctrl_valid,
  output logic               rd_ctrl_ready,
  input  dma_ctrl_t          rd_ctrl,
  output logic               rd_chnl_valid,
  input  logic               rd_chnl_ready,
  output logic [NOC_W-1:0]   rd_chnl_data,
  input  logic               wr_ctrl_valid,
  output logic               wr_ctrl_ready,
  input  dma_ctrl_t          wr_ctrl,
  input  logic               wr_chnl_valid,
  output logic               wr_chnl_ready,
  input  logic [NOC_W-1:0]   wr_chnl_data,
  // TLB lookups: [0] load path, [1] store path
  output logic [1:0][31:0]   tlb_va,
  input  logic [1:0][PA_W-1:0]      tlb_pa,
  input  logic [1:0][PAGE_BITS:0]   tlb_rem,
  input  logic [1:0]         tlb_fault,
  output logic               fault,      // pulse: a packet used an unmapped page
  output logic               wr_idle,    // no store in progress, last flit has left
  // NoC, DMA request plane
  output logic               req_out_valid,
  input  logic               req_out_ready,
  output flit_t              req_out_flit,
  input  logic               req_in_valid,
  output logic               req_in_ready,
  input  flit_t              req_in_flit,
  // NoC, DMA response plane
  output logic               rsp_out_valid,
  input  logic               rsp_out_ready,
  output flit_t              rsp_out_flit,
  input  logic               rsp_in_valid,
  output logic               rsp_in_ready,
  input  flit_t              rsp_in_flit,
  // event pulses, for status and test
  output logic               ev_p2p_req_sent,
  output logic               ev_p2p_req_served,
  output logic               ev_dma_read,
  output logic               ev_dma_write
);
  localparam coord_t MX = coord_t'(MEM_X), MY = coord_t'(MEM_Y);
  localparam coord_t SX = coord_t'(X),     SY = coord_t'(Y);

  function automatic logic [LEN_W-1:0] min_len(input logic [LEN_W-1:0] a,
                                              input logic [PAGE_BITS:0] b);
    return (32'(a) < 32'(b)) ? a : LEN_W'(b);
  endfunction

  // ------------------------------------------------------------- load path
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_ADDR, R_DATA} rstate_t;
  rstate_t          r_st;
  logic [31:0]      r_va;
  logic [LEN_W-1:0] r_rem, r_chunk;
  logic             r_p2p;
  logic [1:0]       rr_q;
  logic             rd_req_valid, rd_req_ready;
  flit_t            rd_req_flit;
  logic [LEN_W-1:0] r_len;

  assign tlb_va[0]     = r_va;
  assign r_len         = min_len(r_rem, tlb_rem[0]);
  assign rd_ctrl_ready = (r_st == R_IDLE);

  always_comb begin
    rd_req_valid = 1'b0;
    rd_req_flit  = '0;
    unique case (r_st)
      R_HDR: begin
        rd_req_valid = 1'b1;
        rd_req_flit  = r_p2p ? make_head(p2p.src_x[rr_q], p2p.src_y[rr_q], SX, SY,
                                         MSG_P2P_REQ, r_rem, 1'b1)
                             : make_head(MX, MY, SX, SY, MSG_DMA_READ, r_len, 1'b0);
      end
      R_ADDR: begin
        rd_req_valid = 1'b1;
        rd_req_flit  = '{head: 1'b0, tail: 1'b1, data: NOC_W'(tlb_pa[0])};
      end
      default: ;
    endcase
  end

  // Response plane input: headers are consumed, data beats go to the accelerator.
  assign rd_chnl_valid = (r_st == R_DATA) && rsp_in_valid && !rsp_in_flit.head;
  assign rd_chnl_data  = rsp_in_flit.data;
  assign rsp_in_ready  = (r_st == R_DATA) && (rsp_in_flit.head || rd_chnl_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_st    <= R_IDLE;
      r_va    <= '0;
      r_rem   <= '0;
      r_chunk <= '0;
      r_p2p   <= 1'b0;
      rr_q    <= '0;
    end else begin
      unique case (r_st)
        R_IDLE: if (rd_ctrl_valid && rd_ctrl.length != '0) begin
          r_va  <= rd_ctrl.index;
          r_rem <= rd_ctrl.length;
          r_p2p <= p2p.load_en;
          r_st  <= R_HDR;
        end
        R_HDR: if (rd_req_ready) begin
          if (r_p2p) begin
            r_chunk <= r_rem;
            rr_q    <= (rr_q >= p2p.nsrc_m1) ? 2'd0 : rr_q + 2'd1;
            r_st    <= R_DATA;
          end else begin
            r_chunk <= r_len;
            r_st    <= R_ADDR;
          end
        end
        R_ADDR: if (rd_req_ready) r_st <= R_DATA;
        R_DATA: if (rd_chnl_valid && rd_chnl_ready) begin
          r_va    <= r_va + 32'd1;
          r_rem   <= r_rem - 1'b1;
          r_chunk <= r_chunk - 1'b1;
          if (r_chunk == LEN_W'(1)) r_st <= (r_rem == LEN_W'(1)) ? R_IDLE : R_HDR;
        end
        default: r_st <= R_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ store path
  typedef enum logic [2:0] {W_IDLE, W_HDR, W_ADDR, W_DATA, W_P2P} wstate_t;
  typedef enum logic [1:0] {P_IDLE, P_HDR, P_DATA} pstate_t;
  wstate_t          w_st;
  pstate_t          p_st;
  logic [31:0]      w_va;
  logic [LEN_W-1:0] w_rem, w_chunk, w_len;
  logic             wr_req_valid, wr_req_ready;
  flit_t            wr_req_flit;
  coord_t           p_dx, p_dy;
  logic [LEN_W-1:0] p_rem, p_seg, p_len;
  hdr_t             in_hdr;

  assign tlb_va[1]     = w_va;
  assign w_len         = min_len(w_rem, tlb_rem[1]);
  assign p_len         = (p_rem < w_rem) ? p_rem : w_rem;
  assign wr_ctrl_ready = (w_st == W_IDLE);
  assign in_hdr        = hdr_t'(req_in_flit.data);
  assign req_in_ready  = (p_st == P_IDLE);

  always_comb begin
    wr_req_valid  = 1'b0;
    wr_req_flit   = '0;
    wr_chnl_ready = 1'b0;
    rsp_out_valid = 1'b0;
    rsp_out_flit  = '0;
    unique case (w_st)
      W_HDR: begin
        wr_req_valid = 1'b1;
        wr_req_flit  = make_head(MX, MY, SX, SY, MSG_DMA_WRITE, w_len, 1'b0);
      end
      W_ADDR: begin
        wr_req_valid = 1'b1;
        wr_req_flit  = '{head: 1'b0, tail: 1'b0, data: NOC_W'(tlb_pa[1])};
      end
      W_DATA: begin
        wr_req_valid  = wr_chnl_valid;
        wr_req_flit   = '{head: 1'b0, tail: (w_chunk == LEN_W'(1)), data: wr_chnl_data};
        wr_chnl_ready = wr_req_ready;
      end
      W_P2P: begin
        if (p_st == P_HDR) begin
          rsp_out_valid = 1'b1;
          rsp_out_flit  = make_head(p_dx, p_dy, SX, SY, MSG_DMA_RSP, p_len, 1'b0);
        end else if (p_st == P_DATA) begin
          rsp_out_valid = wr_chnl_valid;
          rsp_out_flit  = '{head: 1'b0, tail: (p_seg == LEN_W'(1)), data: wr_chnl_data};
          wr_chnl_ready = rsp_out_ready;
        end
      end
      default: ;
    endcase
  end

  wire w_beat = wr_chnl_valid && wr_chnl_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_st    <= W_IDLE;
      p_st    <= P_IDLE;
      w_va    <= '0;
      w_rem   <= '0;
      w_chunk <= '0;
      p_dx    <= '0;
      p_dy    <= '0;
      p_rem   <= '0;
      p_seg   <= '0;
    end else begin
      unique case (w_st)
        W_IDLE: if (wr_ctrl_valid && wr_ctrl.length != '0) begin
          w_va  <= wr_ctrl.index;
          w_rem <= wr_ctrl.length;
          w_st  <= p2p.store_en ? W_P2P : W_HDR;
        end
        W_HDR:  if (wr_req_ready) begin
          w_chunk <= w_len;
          w_st    <= W_ADDR;
        end
        W_ADDR: if (wr_req_ready) w_st <= W_DATA;
        W_DATA: if (w_beat) begin
          w_va    <= w_va + 32'd1;
          w_rem   <= w_rem - 1'b1;
          w_chunk <= w_chunk - 1'b1;
          if (w_chunk == LEN_W'(1)) w_st <= (w_rem == LEN_W'(1)) ? W_IDLE : W_HDR;
        end
        W_P2P: if (w_beat) begin
          w_rem <= w_rem - 1'b1;
          if (w_rem == LEN_W'(1)) w_st <= W_IDLE;
        end
        default: w_st <= W_IDLE;
      endcase

      // p2p responder: serves one request at a time
      unique case (p_st)
        P_IDLE: if (req_in_valid) begin
          p_dx  <= in_hdr.src_x;
          p_dy  <= in_hdr.src_y;
          p_rem <= in_hdr.len;
          p_st  <= P_HDR;
        end
        P_HDR: if (w_st == W_P2P && rsp_out_ready) begin
          p_seg <= p_len;
          p_st  <= P_DATA;
        end
        P_DATA: if (w_st == W_P2P && w_beat) begin
          p_seg <= p_seg - 1'b1;
          p_rem <= p_rem - 1'b1;
          if (p_seg == LEN_W'(1)) p_st <= (p_rem == LEN_W'(1)) ? P_IDLE : P_HDR;
        end
        default: p_st <= P_IDLE;
      endcase
    end
  end

  // ------------------------------------- request-plane arbitration (packet lock)
  typedef enum logic [1:0] {O_NONE, O_RD, O_WR} own_t;
  own_t own_q, sel;
  logic last_wr_q;

  always_comb begin
    sel = own_q;
    if (own_q == O_NONE) begin
      if (rd_req_valid && (!wr_req_valid || last_wr_q)) sel = O_RD;
      else if (wr_req_valid)                             sel = O_WR;
    end
    req_out_valid = (sel == O_RD) ? rd_req_valid : (sel == O_WR) ? wr_req_valid : 1'b0;
    req_out_flit  = (sel == O_WR) ? wr_req_flit : rd_req_flit;
    rd_req_ready  = (sel == O_RD) && req_out_ready;
    wr_req_ready  = (sel == O_WR) && req_out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_q     <= O_NONE;
      last_wr_q <= 1'b0;
    end else if (req_out_valid && req_out_ready) begin
      own_q     <= req_out_flit.tail ? O_NONE : sel;
      last_wr_q <= (sel == O_WR);
    end
  end

  assign wr_idle = (w_st == W_IDLE) && (own_q != O_WR);

  // ------------------------------------------------------------------ events
  assign ev_p2p_req_sent   = (r_st == R_HDR) && r_p2p && rd_req_ready;
  assign ev_p2p_req_served = (p_st == P_IDLE) && req_in_valid;
  assign ev_dma_read       = (r_st == R_HDR) && !r_p2p && rd_req_ready;
  assign ev_dma_write      = (w_st == W_HDR) && wr_req_ready;
  assign fault = (ev_dma_read && tlb_fault[0]) || (ev_dma_write && tlb_fault[1]);

  a_req_in_is_p2p: assert property (@(posedge clk) disable iff (!rst_n)
    req_in_valid |-> (req_in_flit.head && req_in_flit.tail && in_hdr.msg == MSG_P2P_REQ));
  a_rd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_chnl_valid && !rd_chnl_ready) |=> rd_chnl_valid);
endmodule
