// Self-checking test of mem_tile with the behavioural memory (random
// stalls, three-cycle read latency). The testbench sends DMA write and read
// packets from different requesting tiles with random gaps and random
// back-pressure on the response plane. Checked: written data lands at the
// packet address, read responses go back to the requesting tile with the
// right length, framing and data, and reads issued back to back see the
// writes before them.
module tb_mem_tile;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_in_valid = 0, req_in_ready, rsp_out_valid, rsp_out_ready = 0;
  flit_t req_in_flit = '0, rsp_out_flit;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rvalid;
  logic [23:0] mem_req_addr;
  logic [31:0] mem_req_wdata, mem_rdata;

  mem_tile #(.X(1), .Y(1), .PA_W(24), .RDEPTH(4)) dut (.*);
  dram_model #(.PA_W(24), .WORDS(1 << 12), .LAT(3), .STALL(1'b1)) u_dram (.*);

  logic [31:0] shadow [1 << 12];
  typedef struct { int sx, sy, len; logic [31:0] d [$]; } exp_t;
  exp_t exp_q [$];

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input flit_t f);
    while ($urandom_range(0, 3) == 0) begin req_in_valid = 0; @(negedge clk); end
    req_in_valid = 1; req_in_flit = f;
    #1;
    while (!req_in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_in_valid = 0;
  endtask

  task automatic dma_write(input int sx, input int sy, input int a, input int len);
    send(make_head(3'd1, 3'd1, coord_t'(sx), coord_t'(sy), MSG_DMA_WRITE, 16'(len), 1'b0));
    send('{head: 0, tail: 0, data: 32'(a)});
    for (int b = 0; b < len; b++) begin
      logic [31:0] d;
      d = $urandom;
      shadow[a + b] = d;
      send('{head: 0, tail: (b == len - 1), data: d});
    end
  endtask

  task automatic dma_read(input int sx, input int sy, input int a, input int len);
    exp_t e;
    e.sx = sx; e.sy = sy; e.len = len;
    for (int b = 0; b < len; b++) e.d.push_back(shadow[a + b]);
    exp_q.push_back(e);
    send(make_head(3'd1, 3'd1, coord_t'(sx), coord_t'(sy), MSG_DMA_READ, 16'(len), 1'b0));
    send('{head: 0, tail: 1, data: 32'(a)});
  endtask

  // response checker
  int n_rsp = 0;
  initial begin
    exp_t e;
    int k;
    k = -1;
    forever begin
      @(negedge clk);
      rsp_out_ready = $urandom_range(0, 2) != 0;
      #1;
      if (rsp_out_valid && rsp_out_ready) begin
        if (k < 0) begin
          hdr_t h;
          h = hdr_t'(rsp_out_flit.data);
          chk(exp_q.size() > 0, "response expected");
          e = exp_q.pop_front();
          chk(rsp_out_flit.head && h.msg == MSG_DMA_RSP, "response header");
          chk(h.dst_x == coord_t'(e.sx) && h.dst_y == coord_t'(e.sy) && h.src_x == 1 && h.src_y == 1, "response route");
          chk(int'(h.len) == e.len, "response length");
          k = 0;
        end else begin
          chk(!rsp_out_flit.head && rsp_out_flit.tail == (k == e.len - 1), "response framing");
          chk(rsp_out_flit.data == e.d[k], "response data");
          k++;
          if (k == e.len) begin k = -1; n_rsp++; end
        end
      end
    end
  end

  initial begin
    int n;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < (1 << 12); a++) begin shadow[a] = 32'(a * 13 + 5); u_dram.mem[a] = shadow[a]; end
    n = 0;
    for (int t = 0; t < 40; t++) begin
      int a, len;
      a = $urandom_range(0, 3000);
      len = $urandom_range(1, 20);
      if ($urandom_range(0, 1)) dma_write($urandom_range(0, 3), $urandom_range(0, 3), a, len);
      else begin dma_read($urandom_range(0, 3), $urandom_range(0, 3), a, len); n++; end
    end
    dma_write(2, 0, 100, 8);
    dma_read(0, 2, 100, 8);
    dma_read(3, 3, 96, 16);
    n += 2;
    while (n_rsp < n) @(negedge clk);
    repeat (20) @(negedge clk);
    chk(exp_q.size() == 0 && !rsp_out_valid, "all reads answered, nothing extra");
    for (int a = 0; a < (1 << 12); a++)
      if (u_dram.mem[a] != shadow[a]) begin chk(0, "memory contents"); break; end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
