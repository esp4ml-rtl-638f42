// Self-checking test of dma_engine with a real tlb (16-beat pages). The
// testbench models the network side: it answers memory reads, takes memory
// writes, plays up to three p2p source tiles (answering in segments of at
// most three beats), and acts as a consumer tile that sends p2p requests to
// the engine. Every handshake has random stalls. Checked:
//  - DMA bursts are split at page boundaries and carry translated addresses;
//  - load data and stored data arrive in order and unchanged;
//  - p2p load requests go to the configured sources in rotation, carry the
//    full length and this tile's coordinates, and are one flit long;
//  - p2p store data goes to the requesting tile, segmented to what each
//    store still has, and no DMA write is issued while p2p store is on.
module tb_dma_engine;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int PB = 4, ME_X = 2, ME_Y = 1;

  p2p_cfg_t p2p = '0;
  logic rd_ctrl_valid = 0, rd_ctrl_ready, rd_chnl_valid, rd_chnl_ready = 0;
  logic wr_ctrl_valid = 0, wr_ctrl_ready, wr_chnl_valid = 0, wr_chnl_ready;
  dma_ctrl_t rd_ctrl = '0, wr_ctrl = '0;
  logic [31:0] rd_chnl_data, wr_chnl_data = 0;
  logic [1:0][31:0] tlb_va;
  logic [1:0][23:0] tlb_pa;
  logic [1:0][PB:0] tlb_rem;
  logic [1:0] tlb_fault;
  logic fault, wr_idle;
  logic req_out_valid, req_out_ready = 0, req_in_valid = 0, req_in_ready;
  logic rsp_out_valid, rsp_out_ready = 0, rsp_in_valid = 0, rsp_in_ready;
  flit_t req_out_flit, req_in_flit = '0, rsp_out_flit, rsp_in_flit = '0;
  logic ev_p2p_req_sent, ev_p2p_req_served, ev_dma_read, ev_dma_write;
  logic tlb_we = 0;
  logic [3:0] tlb_idx = 0;
  logic [19:0] tlb_ppn = 0;

  dma_engine #(.X(ME_X), .Y(ME_Y), .MEM_X(1), .MEM_Y(0), .PAGE_BITS(PB), .PA_W(24)) dut (.*);
  tlb #(.NPAGES(16), .PAGE_BITS(PB), .PA_W(24)) u_tlb (
    .clk, .rst_n, .wr_en(tlb_we), .wr_idx(tlb_idx), .wr_ppn(tlb_ppn), .inv_all(1'b0),
    .va(tlb_va), .pa(tlb_pa), .page_rem(tlb_rem), .fault(tlb_fault));

  function automatic logic [23:0] xlate(int va);
    return 24'((3 * (va >> PB) + 1) << PB | (va & ((1 << PB) - 1)));
  endfunction
  function automatic logic [31:0] mdata(logic [23:0] pa);
    return {8'hA5, pa} ^ 32'h0013_5700;
  endfunction

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- network side
  typedef struct { logic p2p; int src; logic [23:0] pa; int len; } job_t;
  job_t jobs [$];
  logic [31:0] wmem [logic [23:0]];
  int exp_rd [$];            // expected packet lengths of DMA reads
  int exp_wr [$];            // expected packet lengths of DMA writes
  int exp_src [$];           // expected p2p source per load
  logic [31:0] load_exp [$]; // expected load beats
  logic [31:0] p2p_q [3][$]; // data each p2p source will send
  int n_rd = 0, n_wr = 0, n_p2p = 0, n_sent_rsp = 0;

  // request-plane sink
  initial begin
    hdr_t h;
    int left, phase;
    logic [23:0] pa;
    phase = 0;
    forever begin
      @(negedge clk);
      req_out_ready = $urandom_range(0, 3) != 0;
      #1;
      if (req_out_valid && req_out_ready) begin
        if (phase == 0) begin
          chk(req_out_flit.head, "request packet starts with a head");
          h = hdr_t'(req_out_flit.data);
          chk(h.src_x == ME_X && h.src_y == ME_Y, "request source coordinates");
          if (h.msg == MSG_P2P_REQ) begin
            int s;
            chk(req_out_flit.tail, "p2p request is one flit");
            chk(exp_src.size() > 0, "p2p request expected");
            s = (exp_src.size() > 0) ? exp_src.pop_front() : 0;
            chk(h.dst_x == coord_t'(s) && h.dst_y == coord_t'(2 - s / 2), "p2p request destination");
            jobs.push_back('{p2p: 1, src: s, pa: 0, len: int'(h.len)});
            n_p2p++;
          end else begin
            chk(h.dst_x == 1 && h.dst_y == 0, "DMA request goes to the memory tile");
            chk(h.msg == MSG_DMA_READ || h.msg == MSG_DMA_WRITE, "DMA message type");
            left = int'(h.len);
            phase = 1;
          end
        end else if (phase == 1) begin
          pa = req_out_flit.data[23:0];
          if (h.msg == MSG_DMA_READ) begin
            chk(req_out_flit.tail, "read request is two flits");
            chk(exp_rd.size() > 0 && exp_rd.pop_front() == left, "read burst length (page split)");
            jobs.push_back('{p2p: 0, src: 0, pa: pa, len: left});
            n_rd++;
            phase = 0;
          end else begin
            chk(exp_wr.size() > 0 && exp_wr.pop_front() == left, "write burst length (page split)");
            n_wr++;
            phase = 2;
          end
        end else begin
          wmem[pa] = req_out_flit.data;
          pa++;
          left--;
          chk(req_out_flit.tail == (left == 0), "write tail on the last beat");
          if (left == 0) phase = 0;
        end
      end
    end
  end

  // response-plane source (memory replies and p2p source tiles)
  initial begin
    job_t j;
    int k, seg;
    forever begin
      @(negedge clk);
      rsp_in_valid = 0;
      if (jobs.size() > 0) begin
        j = jobs.pop_front();
        k = 0;
        while (k < j.len) begin
          seg = j.p2p ? ((j.len - k > 3) ? 3 : j.len - k) : j.len;
          for (int b = -1; b < seg; b++) begin
            while ($urandom_range(0, 3) == 0) begin rsp_in_valid = 0; @(negedge clk); end
            rsp_in_valid = 1;
            if (b < 0) rsp_in_flit = make_head(ME_X, ME_Y, j.p2p ? coord_t'(j.src) : 3'd1, 3'd0,
                                               MSG_DMA_RSP, LEN_W'(seg), 1'b0);
            else rsp_in_flit = '{head: 0, tail: (b == seg - 1),
                                 data: j.p2p ? p2p_q[j.src].pop_front() : mdata(j.pa + 24'(k + b))};
            #1;
            while (!rsp_in_ready) begin @(negedge clk); #1; end
            @(negedge clk);
          end
          k += seg;
        end
        rsp_in_valid = 0;
      end
    end
  end

  // load-data sink
  initial begin
    forever begin
      @(negedge clk);
      rd_chnl_ready = $urandom_range(0, 2) != 0;
      #1;
      if (rd_chnl_valid && rd_chnl_ready) begin
        chk(load_exp.size() > 0, "load beat expected");
        if (load_exp.size() > 0) begin
          logic [31:0] e;
          e = load_exp.pop_front();
          chk(rd_chnl_data == e, "load data");
        end
      end
    end
  end

  // p2p store consumer: what it receives on the response plane
  logic [31:0] p2p_got [$];
  int seg_len [$];
  initial begin
    int left;
    left = 0;
    forever begin
      @(negedge clk);
      rsp_out_ready = $urandom_range(0, 2) != 0;
      #1;
      if (rsp_out_valid && rsp_out_ready) begin
        if (left == 0) begin
          hdr_t h;
          h = hdr_t'(rsp_out_flit.data);
          chk(rsp_out_flit.head && h.msg == MSG_DMA_RSP, "p2p data header");
          chk(h.dst_x == 3 && h.dst_y == 3 && h.src_x == ME_X && h.src_y == ME_Y, "p2p data route");
          left = int'(h.len);
          seg_len.push_back(left);
        end else begin
          left--;
          chk(!rsp_out_flit.head && rsp_out_flit.tail == (left == 0), "p2p data framing");
          p2p_got.push_back(rsp_out_flit.data);
        end
      end
    end
  end

  task automatic load(input int va, input int len);
    rd_ctrl = '{index: 32'(va), length: 16'(len)};
    rd_ctrl_valid = 1;
    #1;
    while (!rd_ctrl_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    rd_ctrl_valid = 0;
  endtask

  task automatic store(input int va, input int len, input logic [31:0] base);
    wr_ctrl = '{index: 32'(va), length: 16'(len)};
    wr_ctrl_valid = 1;
    #1;
    while (!wr_ctrl_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    wr_ctrl_valid = 0;
    for (int b = 0; b < len; b++) begin
      while ($urandom_range(0, 3) == 0) begin wr_chnl_valid = 0; @(negedge clk); end
      wr_chnl_valid = 1; wr_chnl_data = base + 32'(b);
      #1;
      while (!wr_chnl_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    wr_chnl_valid = 0;
  endtask

  task automatic wait_idle();
    repeat (5) @(negedge clk);
    while (load_exp.size() > 0 || jobs.size() > 0 || !rd_ctrl_ready || !wr_ctrl_ready) @(negedge clk);
    repeat (10) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 16; p++) begin
      tlb_we = 1; tlb_idx = 4'(p); tlb_ppn = 20'(3 * p + 1);
      @(negedge clk);
    end
    tlb_we = 0;

    // 1: DMA load over four pages: 6 + 16 + 16 + 2 beats
    exp_rd = '{6, 16, 16, 2};
    for (int v = 10; v < 50; v++) load_exp.push_back(mdata(xlate(v)));
    load(10, 40);
    wait_idle();
    chk(n_rd == 4 && exp_rd.size() == 0, "four read bursts");

    // 2: DMA store over two pages: 4 + 16 beats
    exp_wr = '{4, 16};
    store(60, 20, 32'h7000_0000);
    wait_idle();
    chk(n_wr == 2, "two write bursts");
    for (int v = 60; v < 80; v++)
      chk(wmem.exists(xlate(v)) && wmem[xlate(v)] == 32'h7000_0000 + 32'(v - 60), "stored data");

    // 3: p2p load from three sources, in rotation; sources at (0,2) (1,2) (2,1)
    p2p.load_en = 1; p2p.nsrc_m1 = 2'd2;
    for (int s = 0; s < 3; s++) begin p2p.src_x[s] = coord_t'(s); p2p.src_y[s] = coord_t'(2 - s / 2); end
    exp_src = '{0, 1, 2, 0};
    for (int t = 0; t < 4; t++)
      for (int b = 0; b < 5; b++) begin
        logic [31:0] d;
        d = {8'(t), 8'hC0, 16'(b)};
        p2p_q[t % 3].push_back(d);
        load_exp.push_back(d);
      end
    for (int t = 0; t < 4; t++) load(1000 + t * 5, 5);
    wait_idle();
    chk(n_p2p == 4 && exp_src.size() == 0, "four p2p requests");
    chk(n_rd == 4, "no DMA read while p2p load is on");
    p2p.load_en = 0;

    // 4: p2p store; a consumer at (3,3) asks for 7 beats, then 1 more,
    //    while the accelerator stores 4 + 4 beats
    p2p.store_en = 1;
    fork
      begin
        repeat (3) @(negedge clk);
        req_in_flit = make_head(ME_X, ME_Y, 3'd3, 3'd3, MSG_P2P_REQ, 16'd7, 1'b1);
        req_in_valid = 1;
        #1;
        while (!req_in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        req_in_valid = 0;
        while (p2p_got.size() < 7) @(negedge clk);
        req_in_flit = make_head(ME_X, ME_Y, 3'd3, 3'd3, MSG_P2P_REQ, 16'd1, 1'b1);
        req_in_valid = 1;
        #1;
        while (!req_in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        req_in_valid = 0;
      end
      begin
        store(2000, 4, 32'h5000_0000);
        store(2004, 4, 32'h5000_0004);
      end
    join
    wait_idle();
    chk(p2p_got.size() == 8, "eight p2p beats delivered");
    for (int b = 0; b < 8 && b < p2p_got.size(); b++) chk(p2p_got[b] == 32'h5000_0000 + 32'(b), "p2p store data");
    chk(seg_len.size() == 3 && seg_len[0] == 4 && seg_len[1] == 3 && seg_len[2] == 1, "p2p segments 4, 3, 1");
    chk(n_wr == 2, "no DMA write while p2p store is on");
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
