// Memory tile: serves DMA packets from the NoC against the off-chip memory.
//
// MSG_DMA_READ (header, address) is answered on the response plane with a
// MSG_DMA_RSP header and `len` data beats read from consecutive addresses.
// MSG_DMA_WRITE (header, address, `len` beats) writes consecutive addresses
// and sends no reply. The memory port (mem_*) is a request/ready channel
// with in-order read data (mem_rvalid) of any latency and no back-pressure;
// the tile keeps reads in flight only while its RDEPTH-entry read-data queue
// has room for them, so reads stream at one beat per cycle when the memory
// allows it. One packet is served at a time.
// The paper only says that accelerators move data between their local
// memories and DRAM by DMA through the memory tile; the packet handling and
// the memory port here are this design's own. The DRAM controller and the
// DRAM itself sit outside, on the mem_* port.
module mem_tile
  import esp_pkg::*;
#(
  parameter int unsigned X      = 1,
  parameter int unsigned Y      = 1,
  parameter int unsigned PA_W   = 24,
  parameter int unsigned RDEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // NoC, DMA request plane (input only)
  input  logic             req_in_valid,
  output logic             req_in_ready,
  input  flit_t            req_in_flit,
  // NoC, DMA response plane (output only)
  output logic             rsp_out_valid,
  input  logic             rsp_out_ready,
  output flit_t            rsp_out_flit,
  // memory port
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_we,
  output logic [PA_W-1:0]  mem_req_addr,
  output logic [NOC_W-1:0] mem_req_wdata,
  input  logic             mem_rvalid,
  input  logic [NOC_W-1:0] mem_rdata
);
  typedef enum logic [2:0] {M_HDR, M_ADDR, M_RHDR, M_RDATA, M_WDATA} mstate_t;
  mstate_t          st;
  hdr_t             h_q, in_hdr;
  logic [PA_W-1:0]  addr_q;
  logic [LEN_W-1:0] issued_q, sent_q;
  logic [$clog2(RDEPTH+1)-1:0] outst_q, q_cnt;
  logic             q_empty, q_full, q_pop;
  logic [NOC_W-1:0] q_dout;

  assign in_hdr = hdr_t'(req_in_flit.data);

  sync_fifo #(.W(NOC_W), .DEPTH(RDEPTH)) u_rq (
    .clk, .rst_n,
    .push(mem_rvalid), .din(mem_rdata), .full(q_full),
    .pop(q_pop), .dout(q_dout), .empty(q_empty), .count(q_cnt)
  );

  wire can_issue = (32'(outst_q) + 32'(q_cnt)) < RDEPTH;

  always_comb begin
    req_in_ready  = 1'b0;
    rsp_out_valid = 1'b0;
    rsp_out_flit  = '0;
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = addr_q;
    mem_req_wdata = req_in_flit.data;
    q_pop         = 1'b0;
    unique case (st)
      M_HDR, M_ADDR: req_in_ready = 1'b1;
      M_RHDR: begin
        rsp_out_valid = 1'b1;
        rsp_out_flit  = make_head(h_q.src_x, h_q.src_y, coord_t'(X), coord_t'(Y),
                                  MSG_DMA_RSP, h_q.len, 1'b0);
      end
      M_RDATA: begin
        mem_req_valid = (issued_q != h_q.len) && can_issue;
        rsp_out_valid = !q_empty;
        rsp_out_flit  = '{head: 1'b0, tail: (sent_q == h_q.len - 1'b1), data: q_dout};
        q_pop         = rsp_out_valid && rsp_out_ready;
      end
      M_WDATA: begin
        mem_req_valid = req_in_valid;
        mem_req_we    = 1'b1;
        req_in_ready  = mem_req_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= M_HDR;
      h_q      <= '0;
      addr_q   <= '0;
      issued_q <= '0;
      sent_q   <= '0;
      outst_q  <= '0;
    end else begin
      outst_q <= outst_q + $bits(outst_q)'(mem_req_valid && mem_req_ready && !mem_req_we)
                         - $bits(outst_q)'(mem_rvalid);
      unique case (st)
        M_HDR: if (req_in_valid) begin
          h_q <= in_hdr;
          st  <= M_ADDR;
        end
        M_ADDR: if (req_in_valid) begin
          addr_q   <= req_in_flit.data[PA_W-1:0];
          issued_q <= '0;
          sent_q   <= '0;
          st       <= (h_q.msg == MSG_DMA_READ) ? M_RHDR : M_WDATA;
        end
        M_RHDR: if (rsp_out_ready) st <= M_RDATA;
        M_RDATA: begin
          if (mem_req_valid && mem_req_ready) begin
            issued_q <= issued_q + 1'b1;
            addr_q   <= addr_q + 1'b1;
          end
          if (q_pop) begin
            sent_q <= sent_q + 1'b1;
            if (sent_q == h_q.len - 1'b1) st <= M_HDR;
          end
        end
        M_WDATA: if (req_in_valid && mem_req_ready) begin
          addr_q <= addr_q + 1'b1;
          if (req_in_flit.tail) st <= M_HDR;
        end
        default: st <= M_HDR;
      endcase
    end
  end

  a_hdr_kind: assert property (@(posedge clk) disable iff (!rst_n)
    (st == M_HDR && req_in_valid) |->
      (req_in_flit.head && (in_hdr.msg == MSG_DMA_READ || in_hdr.msg == MSG_DMA_WRITE)));
  a_rq_room: assert property (@(posedge clk) disable iff (!rst_n) !(mem_rvalid && q_full));
endmodule
