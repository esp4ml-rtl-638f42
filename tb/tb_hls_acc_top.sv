// Self-checking test of hls_acc_top, the accelerator with the load /
// compute / store loop, on a one-layer network 8x4 (reuse factor 8). The
// testbench plays the role of the ap_fifo environment: it accepts load and
// store requests at random moments, returns input beats from a small memory
// model and takes the output beats with random back-pressure. Checked: the
// request index and length of every chunk (stores offset by conf_size), the
// output values against a fixed-point reference, ap_done once per run and
// ap_idle. A run with zero chunks must finish at once.
module tb_hls_acc_top;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam logic [0:5][15:0] D  = '{16'd8, 16'd4, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam logic [0:4][15:0] RF = '{16'd8, 16'd0, 16'd0, 16'd0, 16'd0};
  localparam int NCH = 5, CONF = 100;

  logic ap_start = 0, ap_done, ap_idle;
  logic [31:0] conf_size = CONF, n_chunks = NCH;
  dma_ctrl_t load_ctrl_din, store_ctrl_din;
  logic load_ctrl_full_n = 0, load_ctrl_write, in1_empty_n = 0, in1_read;
  logic store_ctrl_full_n = 0, store_ctrl_write, out_full_n = 0, out_write;
  logic [31:0] in1_dout = 0, out_din;
  logic wt_we = 0;
  logic [2:0] wt_layer = 0;
  logic [19:0] wt_addr = 0;
  logic [15:0] wt_data = 0;

  hls_acc_top #(.NL(1), .DIMS(D), .REUSE(RF), .RELU(5'b00000)) dut (
    .ap_clk(clk), .ap_rst_n(rst_n), .*);

  logic [31:0] mem [256];
  int w [36];
  int ld_idx = -1, ld_left = 0, n_load = 0, n_store = 0, n_done = 0;
  int st_idx = 0, st_left = 0;

  function automatic logic [15:0] ref_out(int chunk, int j);
    longint acc;
    acc = longint'($signed(16'(w[32 + j]))) * 1024;
    for (int i = 0; i < 8; i++) begin
      logic [31:0] b;
      logic [15:0] x;
      b = mem[chunk * 4 + i / 2];
      x = (i % 2) ? b[31:16] : b[15:0];
      acc += longint'($signed(16'(w[j*8 + i]))) * longint'($signed(x));
    end
    acc = acc >>> 10;
    return acc[15:0];
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 256; k++) mem[k] = {16'($urandom_range(0, 4095) - 2048), 16'($urandom_range(0, 4095) - 2048)};
    for (int k = 0; k < 36; k++) begin
      w[k] = $urandom_range(0, 2047) - 1024;
      wt_we = 1; wt_addr = 20'(k); wt_data = 16'(w[k]);
      @(negedge clk);
    end
    wt_we = 0;
    checks++; if (!ap_idle) begin failures++; $display("FAIL not idle after reset"); end
    ap_start = 1;
    @(negedge clk);
    ap_start = 0;
    while (n_done == 0) begin
      load_ctrl_full_n  = $urandom_range(0, 3) != 0;
      store_ctrl_full_n = $urandom_range(0, 3) != 0;
      out_full_n        = $urandom_range(0, 3) != 0;
      in1_empty_n       = ld_left > 0 && $urandom_range(0, 3) != 0;
      in1_dout          = (ld_left > 0) ? mem[ld_idx + 4 - ld_left] : 32'hx;
      #1;
      if (load_ctrl_write) begin
        checks++;
        if (load_ctrl_din.index != 32'(n_load * 4) || load_ctrl_din.length != 16'd4) begin
          failures++; $display("FAIL load request %0d: %0d/%0d", n_load, load_ctrl_din.index, load_ctrl_din.length);
        end
        ld_idx = int'(load_ctrl_din.index); ld_left = 4; n_load++;
      end else if (in1_read) ld_left--;
      if (store_ctrl_write) begin
        checks++;
        if (store_ctrl_din.index != 32'(CONF + n_store * 2) || store_ctrl_din.length != 16'd2) begin
          failures++; $display("FAIL store request %0d: %0d/%0d", n_store, store_ctrl_din.index, store_ctrl_din.length);
        end
        st_left = 2; n_store++;
      end
      if (out_write) begin
        int b;
        logic [31:0] e;
        b = 2 - st_left;
        e = {ref_out(n_store - 1, 2*b + 1), ref_out(n_store - 1, 2*b)};
        checks++;
        if (st_left == 0) begin failures++; $display("FAIL output without a store request"); end
        else if (out_din != e) begin failures++; $display("FAIL chunk %0d beat %0d: %h expected %h", n_store - 1, b, out_din, e); end
        st_left--;
      end
      @(negedge clk);
      if (ap_done) n_done++;
    end
    checks++; if (n_load != NCH || n_store != NCH) begin failures++; $display("FAIL %0d loads %0d stores", n_load, n_store); end
    repeat (3) @(negedge clk);
    checks++; if (!ap_idle || ap_done) begin failures++; $display("FAIL not idle after done"); end
    // zero chunks: done in the cycle after start, no traffic
    n_chunks = 0; ap_start = 1;
    @(negedge clk);
    ap_start = 0;
    checks++; if (!ap_done || load_ctrl_write) begin failures++; $display("FAIL zero-chunk run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
