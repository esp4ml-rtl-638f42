// Self-checking test of noc_router (router at (1,1) of a 3 x 3 mesh).
// Every input port sends packets of 1 to 4 flits to random destinations
// that XY routing allows from that port; outputs apply random back-pressure.
// The checker computes the expected output port of each packet itself and
// verifies: right port, flits of a packet contiguous and in order (wormhole
// lock), packets from one input to one output in order, nothing lost.
// It also measures the latency of a lone single-flit packet.
module tb_noc_router;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [4:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [4:0] in_flit, out_flit;

  noc_router #(.X(1), .Y(1), .DEPTH(4)) dut (.*);

  localparam int NPKT = 60;
  int sent_flits = 0, recv_flits = 0;
  logic bp_en = 1'b1;

  function automatic int exp_port(input int dx, input int dy);
    if (dx > 1) return P_E;
    if (dx < 1) return P_W;
    if (dy > 1) return P_S;
    if (dy < 1) return P_N;
    return P_L;
  endfunction

  // per output: current packet (input, seq) and next flit index
  int cur_in [5], cur_seq [5], cur_idx [5], cur_len [5];
  bit in_pkt [5];
  int last_seq [5][5];

  initial begin
    for (int o = 0; o < 5; o++) begin
      in_pkt[o] = 0;
      for (int i = 0; i < 5; i++) last_seq[o][i] = -1;
    end
  end

  always @(posedge clk) begin
    for (int o = 0; o < 5; o++) out_ready[o] <= bp_en ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
  initial begin
    out_ready = '1;
  end

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        flit_t f;
        f = out_flit[o];
        recv_flits++;
        if (f.head) begin
          hdr_t h;
          h = hdr_t'(f.data);
          checks++;
          if (in_pkt[o]) begin failures++; $display("FAIL head inside packet on %0d", o); end
          checks++;
          if (exp_port(int'(h.dst_x), int'(h.dst_y)) != o) begin
            failures++; $display("FAIL packet to (%0d,%0d) left on port %0d", h.dst_x, h.dst_y, o);
          end
          cur_in[o]  = int'(h.src_x);    // tb puts the input port id in src_x
          cur_seq[o] = int'(h.len[15:8]);
          cur_len[o] = int'(h.len[7:0]);
          cur_idx[o] = 1;
          checks++;
          if (cur_seq[o] <= last_seq[o][cur_in[o]]) begin
            failures++; $display("FAIL order in%0d->out%0d", cur_in[o], o);
          end
          last_seq[o][cur_in[o]] = cur_seq[o];
          in_pkt[o] = !f.tail;
          checks++;
          if (f.tail != (cur_len[o] == 1)) begin failures++; $display("FAIL tail on head"); end
        end else begin
          checks++;
          if (!in_pkt[o] || f.data != {8'hA5, 8'(cur_in[o]), 8'(cur_seq[o]), 8'(cur_idx[o])}) begin
            failures++; $display("FAIL body flit %h on port %0d", f.data, o);
          end
          cur_idx[o]++;
          checks++;
          if (f.tail != (cur_idx[o] == cur_len[o])) begin failures++; $display("FAIL tail position"); end
          if (f.tail) in_pkt[o] = 0;
        end
      end
    end
  end

  task automatic send(input int i, input int dx, input int dy, input int seq, input int len);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      if (k == 0) begin
        in_flit[i] = make_head(coord_t'(dx), coord_t'(dy), coord_t'(i), 3'd0, MSG_DMA_RSP,
                                {8'(seq), 8'(len)}, len == 1);
      end else begin
        in_flit[i] = '{head: 1'b0, tail: (k == len - 1), data: {8'hA5, 8'(i), 8'(seq), 8'(k)}};
      end
      in_valid[i] = 1'b1;
      // in_ready depends only on router state: its value now holds at the next edge
      while (!in_ready[i]) @(negedge clk);
      @(posedge clk);
      sent_flits++;
    end
    @(negedge clk);
    in_valid[i] = 1'b0;
  endtask

  task automatic driver(input int i);
    for (int p = 0; p < NPKT; p++) begin
      int dx, dy;
      case (i)
        P_L: begin dx = $urandom_range(0, 2); dy = $urandom_range(0, 2); end
        P_W: begin dx = $urandom_range(1, 2); dy = $urandom_range(0, 2); end
        P_E: begin dx = $urandom_range(0, 1); dy = $urandom_range(0, 2); end
        P_N: begin dx = 1; dy = $urandom_range(1, 2); end
        default: begin dx = 1; dy = $urandom_range(0, 1); end
      endcase
      send(i, dx, dy, p, $urandom_range(1, 4));
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
  endtask

  initial begin
    in_valid = '0;
    in_flit  = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    fork
      driver(0); driver(1); driver(2); driver(3); driver(4);
    join
    repeat (50) @(posedge clk);
    checks++;
    if (sent_flits != recv_flits || sent_flits == 0) begin
      failures++; $display("FAIL sent %0d received %0d flits", sent_flits, recv_flits);
    end
    // latency of a lone flit, local in -> east out, no back-pressure
    bp_en = 1'b0;
    repeat (3) @(posedge clk);
    begin
      @(negedge clk);
      in_flit[P_L] = make_head(3'd2, 3'd1, 3'(P_L), 3'd0, MSG_DMA_RSP, {8'd200, 8'd1}, 1'b1);
      in_valid[P_L] = 1'b1;
      @(posedge clk);
      // in the FIFO after this edge; it must be offered on E at once and
      // leave at the next edge: one cycle per router
      @(negedge clk);
      in_valid[P_L] = 1'b0;
      checks++;
      if (!out_valid[P_E] || !out_flit[P_E].head) begin failures++; $display("FAIL latency"); end
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
