// Self-checking test of noc_mesh (3 x 3). Every tile sends packets of 1 to
// 5 flits to random tiles (itself included) while every tile's local output
// applies random back-pressure. The checker verifies that each packet comes
// out at the tile it names, contiguous and complete, that packets of one
// source to one destination keep their order, and that no flit is lost.
// A lone packet from corner (0,0) to corner (2,2) must take one cycle per
// router on its 5-router path.
module tb_noc_mesh;
  import esp_pkg::*;
  localparam int MX = 3, MY = 3, NT = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [NT-1:0] l_in_valid, l_in_ready, l_out_valid, l_out_ready;
  flit_t [NT-1:0] l_in_flit, l_out_flit;
  logic bp_en = 1'b1;

  noc_mesh #(.MX(MX), .MY(MY), .DEPTH(4)) dut (.*);

  int sent = 0, recv = 0;
  bit in_pkt [NT];
  int cur_src [NT], cur_seq [NT], cur_idx [NT], cur_len [NT];
  int last_seq [NT][NT];

  initial begin
    l_out_ready = '1;
    for (int d = 0; d < NT; d++) begin
      in_pkt[d] = 0;
      for (int s = 0; s < NT; s++) last_seq[d][s] = -1;
    end
  end

  always @(posedge clk) l_out_ready <= bp_en ? NT'($urandom) | NT'($urandom) : '1;

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < NT; d++) if (l_out_valid[d] && l_out_ready[d]) begin
      flit_t f;
      f = l_out_flit[d];
      recv++;
      checks++;
      if (f.head) begin
        hdr_t h;
        h = hdr_t'(f.data);
        if (in_pkt[d] || int'(h.dst_y) * MX + int'(h.dst_x) != d) begin
          failures++; $display("FAIL head at tile %0d for (%0d,%0d)", d, h.dst_x, h.dst_y);
        end
        cur_src[d] = int'(h.src_y) * MX + int'(h.src_x);
        cur_seq[d] = int'(h.len[15:8]);
        cur_len[d] = int'(h.len[7:0]);
        cur_idx[d] = 1;
        checks++;
        if (cur_seq[d] <= last_seq[d][cur_src[d]]) begin failures++; $display("FAIL order"); end
        last_seq[d][cur_src[d]] = cur_seq[d];
        in_pkt[d] = !f.tail;
      end else begin
        if (!in_pkt[d] || f.data != {8'h5A, 8'(cur_src[d]), 8'(cur_seq[d]), 8'(cur_idx[d])}) begin
          failures++; $display("FAIL body %h at tile %0d", f.data, d);
        end
        cur_idx[d]++;
        if (f.tail) begin
          checks++;
          if (cur_idx[d] != cur_len[d]) begin failures++; $display("FAIL length"); end
          in_pkt[d] = 0;
        end
      end
    end
  end

  task automatic send(input int s, input int d, input int seq, input int len);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      if (k == 0)
        l_in_flit[s] = make_head(coord_t'(d % MX), coord_t'(d / MX), coord_t'(s % MX),
                                 coord_t'(s / MX), MSG_DMA_RSP, {8'(seq), 8'(len)}, len == 1);
      else
        l_in_flit[s] = '{head: 1'b0, tail: (k == len - 1), data: {8'h5A, 8'(s), 8'(seq), 8'(k)}};
      l_in_valid[s] = 1'b1;
      while (!l_in_ready[s]) @(negedge clk);
      @(posedge clk);
      sent++;
    end
    @(negedge clk);
    l_in_valid[s] = 1'b0;
  endtask

  task automatic driver(input int s);
    for (int p = 0; p < 40; p++) send(s, $urandom_range(0, NT - 1), p, $urandom_range(1, 5));
  endtask

  initial begin
    l_in_valid = '0;
    l_in_flit  = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    fork
      driver(0); driver(1); driver(2); driver(3); driver(4);
      driver(5); driver(6); driver(7); driver(8);
    join
    repeat (100) @(posedge clk);
    checks++;
    if (sent != recv || sent == 0) begin failures++; $display("FAIL sent %0d recv %0d", sent, recv); end
    // latency, corner to corner
    bp_en = 1'b0;
    repeat (5) @(posedge clk);
    begin
      int n;
      @(negedge clk);
      l_in_flit[0] = make_head(3'd2, 3'd2, 3'd0, 3'd0, MSG_DMA_RSP, {8'd250, 8'd1}, 1'b1);
      l_in_valid[0] = 1'b1;
      @(posedge clk);         // enters router (0,0)
      @(negedge clk);
      l_in_valid[0] = 1'b0;
      n = 0;
      while (!l_out_valid[8]) begin @(negedge clk); n++; end
      checks++;
      // four hops of one cycle each before it is offered at router (2,2)
      if (n != 4) begin failures++; $display("FAIL corner latency %0d", n); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
