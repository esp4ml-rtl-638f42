// Accelerator top of the HLS design flow: the LOAD / COMPUTE / STORE loop
// around an hls4ml kernel, with ap_fifo ports as Vivado HLS would give it.
//
// After ap_start the block runs, for i = 0 .. n_chunks-1:
//   LOAD    write a load request {index i*IN_BEATS, length IN_BEATS} to
//           load_ctrl, then read IN_BEATS beats from in1 and unpack each
//           32-bit beat into two 16-bit words (low half first) of the input
//           buffer;
//   COMPUTE run mlp_kernel on the input buffer and copy its result to the
//           output buffer;
//   STORE   write a store request {index conf_size + i*OUT_BEATS, length
//           OUT_BEATS} to store_ctrl, then pack the output buffer two words
//           per beat onto out.
// and then pulses ap_done. One frame is one chunk. The input and output
// buffers are the accelerator's private local memory; they are registers so
// that the kernel can read many words per cycle.
// ap_fifo ports: a *_write / *_read strobe moves one item when *_full_n /
// *_empty_n is high.
// The loop, its three phases, the index/length computation from the
// iteration, and conf_size as the store offset follow the paper's listing
// of the wrapper's top function; one frame per chunk, the beat packing and
// n_chunks as a register are this design's choices.
module hls_acc_top
  import esp_pkg::*;
#(
  parameter int unsigned NL = 5,
  parameter logic [0:5][15:0] DIMS  = '{16'd1024, 16'd256, 16'd128, 16'd64, 16'd32, 16'd10},
  parameter logic [0:4][15:0] REUSE = '{16'd4096, 16'd4096, 16'd4096, 16'd2048, 16'd320},
  parameter logic [0:4]       RELU  = 5'b11110,
  localparam int unsigned IN_W  = DIMS[0],
  localparam int unsigned OUT_W = DIMS[NL],
  localparam int unsigned IN_BEATS  = IN_W / 2,
  localparam int unsigned OUT_BEATS = OUT_W / 2
) (
  input  logic              ap_clk,
  input  logic              ap_rst_n,
  input  logic              ap_start,
  output logic              ap_done,
  output logic              ap_idle,
  input  logic [31:0]       conf_size,
  input  logic [31:0]       n_chunks,
  output dma_ctrl_t         load_ctrl_din,
  input  logic              load_ctrl_full_n,
  output logic              load_ctrl_write,
  input  logic [31:0]       in1_dout,
  input  logic              in1_empty_n,
  output logic              in1_read,
  output dma_ctrl_t         store_ctrl_din,
  input  logic              store_ctrl_full_n,
  output logic              store_ctrl_write,
  output logic [31:0]       out_din,
  input  logic              out_full_n,
  output logic              out_write,
  input  logic              wt_we,
  input  logic [2:0]        wt_layer,
  input  logic [19:0]       wt_addr,
  input  logic [15:0]       wt_data
);
  if ((IN_W % 2) != 0 || (OUT_W % 2) != 0) begin : g_bad
    $error("hls_acc_top: layer widths must be even (two words per beat)");
  end

  typedef enum logic [2:0] {S_IDLE, S_LCTRL, S_LDATA, S_COMP, S_CWAIT, S_SCTRL, S_SDATA} state_t;
  state_t st;

  logic [31:0]              i_q, n_q, conf_q;
  logic [15:0]              beat_q;
  logic [IN_W-1:0][15:0]    inbuff;
  logic [OUT_W-1:0][15:0]   outbuff, k_out;
  logic                     k_start, k_done;

  mlp_kernel #(.NL(NL), .DIMS(DIMS), .REUSE(REUSE), .RELU(RELU)) u_kernel (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .start(k_start), .done(k_done),
    .in_vec(inbuff), .out_vec(k_out),
    .wt_we, .wt_layer, .wt_addr, .wt_data
  );

  assign ap_idle          = (st == S_IDLE);
  assign k_start          = (st == S_COMP);
  assign load_ctrl_write  = (st == S_LCTRL) && load_ctrl_full_n;
  assign load_ctrl_din    = '{index: i_q * IN_BEATS, length: LEN_W'(IN_BEATS)};
  assign in1_read         = (st == S_LDATA) && in1_empty_n;
  assign store_ctrl_write = (st == S_SCTRL) && store_ctrl_full_n;
  assign store_ctrl_din   = '{index: conf_q + i_q * OUT_BEATS, length: LEN_W'(OUT_BEATS)};
  assign out_write        = (st == S_SDATA) && out_full_n;
  assign out_din          = {outbuff[2*beat_q+1], outbuff[2*beat_q]};

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      st      <= S_IDLE;
      i_q     <= '0;
      n_q     <= '0;
      conf_q  <= '0;
      beat_q  <= '0;
      ap_done <= 1'b0;
      inbuff  <= '0;
      outbuff <= '0;
    end else begin
      ap_done <= 1'b0;
      unique case (st)
        S_IDLE: if (ap_start) begin
          i_q    <= '0;
          n_q    <= n_chunks;
          conf_q <= conf_size;
          if (n_chunks == '0) ap_done <= 1'b1;
          else                st      <= S_LCTRL;
        end
        S_LCTRL: if (load_ctrl_write) begin
          beat_q <= '0;
          st     <= S_LDATA;
        end
        S_LDATA: if (in1_read) begin
          inbuff[2*beat_q]   <= in1_dout[15:0];
          inbuff[2*beat_q+1] <= in1_dout[31:16];
          beat_q <= beat_q + 16'd1;
          if (32'(beat_q) == IN_BEATS - 1) st <= S_COMP;
        end
        S_COMP:  st <= S_CWAIT;
        S_CWAIT: if (k_done) begin
          outbuff <= k_out;
          st      <= S_SCTRL;
        end
        S_SCTRL: if (store_ctrl_write) begin
          beat_q <= '0;
          st     <= S_SDATA;
        end
        S_SDATA: if (out_write) begin
          beat_q <= beat_q + 16'd1;
          if (32'(beat_q) == OUT_BEATS - 1) begin
            if (i_q + 32'd1 == n_q) begin
              ap_done <= 1'b1;
              st      <= S_IDLE;
            end else begin
              i_q <= i_q + 32'd1;
              st  <= S_LCTRL;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
