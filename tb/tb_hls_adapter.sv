// Self-checking test of hls_adapter. All four queues run at once with
// random producers and consumers on both sides; each queue must deliver
// every word once and in order, and a producer may only write while the
// queue reports space. The start pulse must reach ap_start one cycle
// later, with the configuration sampled at start.
module tb_hls_adapter;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, acc_done, ap_start, ap_done = 0;
  logic [31:0] cfg_conf_size = 0, cfg_n_chunks = 0, conf_size, n_chunks;
  logic rd_ctrl_valid, rd_ctrl_ready = 0, rd_chnl_valid = 0, rd_chnl_ready;
  logic wr_ctrl_valid, wr_ctrl_ready = 0, wr_chnl_valid, wr_chnl_ready = 0;
  dma_ctrl_t rd_ctrl, wr_ctrl, load_ctrl_din = '0, store_ctrl_din = '0;
  logic [31:0] rd_chnl_data = 0, wr_chnl_data, in1_dout, out_din = 0;
  logic load_ctrl_full_n, load_ctrl_write = 0, in1_empty_n, in1_read = 0;
  logic store_ctrl_full_n, store_ctrl_write = 0, out_full_n, out_write = 0;

  hls_adapter #(.DEPTH(2)) dut (.*);

  // one expected-value queue per channel: 0 load ctrl, 1 read data,
  // 2 store ctrl, 3 write data
  logic [47:0] q [4][$];
  int sent [4], got [4];

  task automatic pop_check(input int c, input logic [47:0] v);
    checks++;
    if (q[c].size() == 0) begin failures++; $display("FAIL ch%0d: word without a write", c); end
    else begin
      logic [47:0] e;
      e = q[c].pop_front();
      if (e != v) begin failures++; $display("FAIL ch%0d: %h expected %h", c, v, e); end
    end
    got[c]++;
  endtask

  localparam int N = 300;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // start and configuration sampling
    cfg_conf_size = 32'd1234; cfg_n_chunks = 32'd7; start = 1;
    #1;
    checks++; if (ap_start) begin failures++; $display("FAIL ap_start early"); end
    @(negedge clk);
    start = 0; cfg_conf_size = 0; cfg_n_chunks = 0;
    checks++; if (!ap_start) begin failures++; $display("FAIL ap_start missing"); end
    checks++; if (conf_size != 1234 || n_chunks != 7) begin failures++; $display("FAIL cfg sample"); end
    @(negedge clk);
    checks++; if (ap_start) begin failures++; $display("FAIL ap_start longer than a cycle"); end
    ap_done = 1; #1;
    checks++; if (!acc_done) begin failures++; $display("FAIL acc_done"); end
    @(negedge clk);
    ap_done = 0;
    // random traffic on all four queues
    while (got[0] < N || got[1] < N || got[2] < N || got[3] < N) begin
      load_ctrl_write  = sent[0] < N && load_ctrl_full_n  && $urandom_range(0, 2) != 0;
      rd_chnl_valid    = sent[1] < N && $urandom_range(0, 2) != 0;
      store_ctrl_write = sent[2] < N && store_ctrl_full_n && $urandom_range(0, 2) != 0;
      out_write        = sent[3] < N && out_full_n        && $urandom_range(0, 2) != 0;
      load_ctrl_din  = '{index: $urandom, length: 16'($urandom)};
      rd_chnl_data   = $urandom;
      store_ctrl_din = '{index: $urandom, length: 16'($urandom)};
      out_din        = $urandom;
      rd_ctrl_ready = $urandom_range(0, 2) != 0;
      in1_read      = in1_empty_n && $urandom_range(0, 2) != 0;
      wr_ctrl_ready = $urandom_range(0, 2) != 0;
      wr_chnl_ready = $urandom_range(0, 2) != 0;
      #1;
      if (load_ctrl_write)                begin q[0].push_back(48'(load_ctrl_din));  sent[0]++; end
      if (rd_chnl_valid && rd_chnl_ready) begin q[1].push_back(48'(rd_chnl_data));   sent[1]++; end
      if (store_ctrl_write)               begin q[2].push_back(48'(store_ctrl_din)); sent[2]++; end
      if (out_write)                      begin q[3].push_back(48'(out_din));        sent[3]++; end
      if (rd_ctrl_valid && rd_ctrl_ready) pop_check(0, 48'(rd_ctrl));
      if (in1_read)                       pop_check(1, 48'(in1_dout));
      if (wr_ctrl_valid && wr_ctrl_ready) pop_check(2, 48'(wr_ctrl));
      if (wr_chnl_valid && wr_chnl_ready) pop_check(3, 48'(wr_chnl_data));
      @(negedge clk);
    end
    load_ctrl_write = 0; rd_chnl_valid = 0; store_ctrl_write = 0; out_write = 0;
    in1_read = 0; rd_ctrl_ready = 0; wr_ctrl_ready = 0; wr_chnl_ready = 0;
    @(negedge clk);
    checks++;
    if (rd_ctrl_valid || in1_empty_n || wr_ctrl_valid || wr_chnl_valid) begin
      failures++; $display("FAIL queues not empty at the end");
    end
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
