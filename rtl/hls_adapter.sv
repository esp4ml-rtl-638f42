// RTL adapter between an accelerator with Vivado HLS ap_fifo ports and the
// accelerator interface of the tile (valid/ready channels).
//
// Four shallow FIFO queues (DEPTH entries each) decouple the two protocols:
// load requests and store requests from the accelerator to the DMA engine,
// read data from the DMA engine to the accelerator, and write data from the
// accelerator to the DMA engine. On the ap_fifo side a queue shows
// full_n / empty_n and takes write / read strobes; on the tile side it is a
// valid/ready channel. A transfer through a queue takes one cycle.
// The adapter also binds the tile's configuration registers to the
// accelerator: conf_size and n_chunks are sampled when start arrives and
// held for the whole run (ap_start is a one-cycle pulse), and ap_done
// becomes the tile's acc_done.
// From the paper: the adapter bridges ap_fifo to the tile protocol with
// shallow FIFO queues and binds configuration registers. The queue depth and
// the sampling of the registers are this design's choices.
module hls_adapter
  import esp_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // tile side: configuration
  input  logic             start,
  input  logic [31:0]      cfg_conf_size,
  input  logic [31:0]      cfg_n_chunks,
  output logic             acc_done,
  // tile side: DMA channels
  output logic             rd_ctrl_valid,
  input  logic             rd_ctrl_ready,
  output dma_ctrl_t        rd_ctrl,
  input  logic             rd_chnl_valid,
  output logic             rd_chnl_ready,
  input  logic [NOC_W-1:0] rd_chnl_data,
  output logic             wr_ctrl_valid,
  input  logic             wr_ctrl_ready,
  output dma_ctrl_t        wr_ctrl,
  output logic             wr_chnl_valid,
  input  logic             wr_chnl_ready,
  output logic [NOC_W-1:0] wr_chnl_data,
  // accelerator side: ap_ctrl and configuration
  output logic             ap_start,
  input  logic             ap_done,
  output logic [31:0]      conf_size,
  output logic [31:0]      n_chunks,
  // accelerator side: ap_fifo
  input  dma_ctrl_t        load_ctrl_din,
  output logic             load_ctrl_full_n,
  input  logic             load_ctrl_write,
  output logic [NOC_W-1:0] in1_dout,
  output logic             in1_empty_n,
  input  logic             in1_read,
  input  dma_ctrl_t        store_ctrl_din,
  output logic             store_ctrl_full_n,
  input  logic             store_ctrl_write,
  input  logic [NOC_W-1:0] out_din,
  output logic             out_full_n,
  input  logic             out_write
);
  localparam int unsigned CW = $bits(dma_ctrl_t);
  logic lc_full, lc_empty, sc_full, sc_empty, rd_full, rd_empty, wd_full, wd_empty;

  sync_fifo #(.W(CW), .DEPTH(DEPTH)) u_load_ctrl (
    .clk, .rst_n, .push(load_ctrl_write), .din(load_ctrl_din), .full(lc_full),
    .pop(rd_ctrl_valid && rd_ctrl_ready), .dout(rd_ctrl), .empty(lc_empty), .count());
  assign load_ctrl_full_n = !lc_full;
  assign rd_ctrl_valid    = !lc_empty;

  sync_fifo #(.W(NOC_W), .DEPTH(DEPTH)) u_rd_data (
    .clk, .rst_n, .push(rd_chnl_valid && rd_chnl_ready), .din(rd_chnl_data), .full(rd_full),
    .pop(in1_read), .dout(in1_dout), .empty(rd_empty), .count());
  assign rd_chnl_ready = !rd_full;
  assign in1_empty_n   = !rd_empty;

  sync_fifo #(.W(CW), .DEPTH(DEPTH)) u_store_ctrl (
    .clk, .rst_n, .push(store_ctrl_write), .din(store_ctrl_din), .full(sc_full),
    .pop(wr_ctrl_valid && wr_ctrl_ready), .dout(wr_ctrl), .empty(sc_empty), .count());
  assign store_ctrl_full_n = !sc_full;
  assign wr_ctrl_valid     = !sc_empty;

  sync_fifo #(.W(NOC_W), .DEPTH(DEPTH)) u_wr_data (
    .clk, .rst_n, .push(out_write), .din(out_din), .full(wd_full),
    .pop(wr_chnl_valid && wr_chnl_ready), .dout(wr_chnl_data), .empty(wd_empty), .count());
  assign out_full_n    = !wd_full;
  assign wr_chnl_valid = !wd_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_start  <= 1'b0;
      conf_size <= '0;
      n_chunks  <= '0;
    end else begin
      ap_start <= start;
      if (start) begin
        conf_size <= cfg_conf_size;
        n_chunks  <= cfg_n_chunks;
      end
    end
  end
  assign acc_done = ap_done;
endmodule
