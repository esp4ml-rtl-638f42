// End-to-end test of the multi-tile classifier SoC (esp_soc) at reduced layer sizes (32x16x16x8x8x4, 16-beat pages).
//
// Software is played by the testbench on the register bus; a behavioural
// DRAM sits on the memory port. Pipeline A = tiles 4,0,1,2,6 and pipeline
// B = tiles 10,14,13,12,8 hold classifier stages 1..5. Phases:
//  1. load weights, biases and page tables of all ten accelerators;
//  2. pipeline A with plain DMA, stages run one after the other, each
//     reading its input from DRAM and writing its output to DRAM;
//  3. pipeline B with p2p, all stages started together: stage 1 loads from
//     DRAM, stages pass data tile to tile, stage 5 stores to DRAM;
//  4. two stage-1 tiles (4 and 10) feed one stage-2 tile (14), which loads
//     from both by p2p in turn (two sources in P2P_REG) and stores to DRAM.
// Results are compared with a fixed-point model of the network computed
// here; DRAM traffic of phases 2 and 3 is compared (p2p must need less);
// each mechanism (DMA read/write, page-split bursts, p2p request, p2p serve,
// two-source rotation, interrupt) is counted and must happen.
module tb_esp_soc;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  localparam int NT = 16;
  localparam int PB = 4;              // page bits of the DUT
  localparam int F  = 4;               // frames per run
  localparam int BUFP = 8;          // pages per buffer
  localparam dims_t SD [5] = '{'{16'd32, 16'd16, 16'd0, 16'd0, 16'd0, 16'd0}, '{16'd16, 16'd16, 16'd0, 16'd0, 16'd0, 16'd0}, '{16'd16, 16'd8, 16'd0, 16'd0, 16'd0, 16'd0}, '{16'd8, 16'd8, 16'd0, 16'd0, 16'd0, 16'd0}, '{16'd8, 16'd4, 16'd0, 16'd0, 16'd0, 16'd0}};
  localparam int W0 = SD[0][0];           // input words per frame
  localparam int ROWS_W = 1 << PB;

  logic        cfg_valid = 0, cfg_we = 0, cfg_rvalid;
  logic [3:0]  cfg_tile = 0;
  logic [7:0]  cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic [NT-1:0] irq, ev_p2p_req_sent, ev_p2p_req_served, ev_dma_read, ev_dma_write, ev_done;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_rvalid;
  logic [23:0] mem_req_addr;
  logic [31:0] mem_req_wdata, mem_rdata;
  flit_t [NT-1:0] ext_req_out_flit, ext_rsp_out_flit;
  logic  [NT-1:0] ext_req_in_ready, ext_req_out_valid, ext_rsp_in_ready, ext_rsp_out_valid;

  esp_soc #(
    .PAGE_BITS(4),
    .TILE_DIMS('{
      '{16'd16,16'd16,0,0,0,0}, '{16'd16,16'd8,0,0,0,0}, '{16'd8,16'd8,0,0,0,0}, NO_DIMS,
      '{16'd32,16'd16,0,0,0,0}, NO_DIMS, '{16'd8,16'd4,0,0,0,0}, NO_DIMS,
      '{16'd8,16'd4,0,0,0,0}, NO_DIMS, '{16'd32,16'd16,0,0,0,0}, NO_DIMS,
      '{16'd8,16'd8,0,0,0,0}, '{16'd16,16'd8,0,0,0,0}, '{16'd16,16'd16,0,0,0,0}, NO_DIMS}),
    .TILE_REUSE('{
      '{16'd32,0,0,0,0}, '{16'd16,0,0,0,0}, '{16'd8,0,0,0,0}, NO_REUSE,
      '{16'd64,0,0,0,0}, NO_REUSE, '{16'd4,0,0,0,0}, NO_REUSE,
      '{16'd4,0,0,0,0}, NO_REUSE, '{16'd64,0,0,0,0}, NO_REUSE,
      '{16'd8,0,0,0,0}, '{16'd16,0,0,0,0}, '{16'd32,0,0,0,0}, NO_REUSE})
  ) dut (
    .clk, .rst_n,
    .cfg_valid, .cfg_we, .cfg_tile, .cfg_addr, .cfg_wdata, .cfg_rvalid, .cfg_rdata, .irq,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rvalid, .mem_rdata,
    .ext_req_in_valid('0), .ext_req_in_ready, .ext_req_in_flit('0),
    .ext_req_out_valid, .ext_req_out_ready('1), .ext_req_out_flit,
    .ext_rsp_in_valid('0), .ext_rsp_in_ready, .ext_rsp_in_flit('0),
    .ext_rsp_out_valid, .ext_rsp_out_ready('1), .ext_rsp_out_flit,
    .ev_p2p_req_sent, .ev_p2p_req_served, .ev_dma_read, .ev_dma_write, .ev_done
  );

  dram_model #(.PA_W(24), .WORDS(1 << 17), .LAT(3), .STALL(1'b1)) u_dram (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_req_wdata, .mem_rvalid, .mem_rdata
  );

  // tiles of the two pipelines, stage 1..5
  localparam int PA [5] = '{4, 0, 1, 2, 6};
  localparam int PBT[5] = '{10, 14, 13, 12, 8};

  // ---------------------------------------------------------------- model
  // weights[tile] flattened as in dense_layer: W[j][i] at j*N_IN+i, bias after
  int wts [NT][$];

  function automatic int stage_of(input int t);
    for (int s = 0; s < 5; s++) if (PA[s] == t || PBT[s] == t) return s;
    return -1;
  endfunction

  function automatic logic [15:0] fx(input longint v);
    return v[15:0];
  endfunction

  // one dense layer, computed independently of the RTL
  function automatic void ref_layer(input int t, input int s, input logic [15:0] x [],
                                    output logic [15:0] y []);
    int ni, no;
    ni = SD[s][0];
    no = SD[s][1];
    y = new[no];
    for (int j = 0; j < no; j++) begin
      longint acc;
      acc = longint'($signed(16'(wts[t][ni*no + j]))) * 1024;
      for (int i = 0; i < ni; i++)
        acc += longint'($signed(16'(wts[t][j*ni + i]))) * longint'($signed(x[i]));
      acc = acc >>> 10;
      y[j] = (s != 4 && acc < 0) ? 16'd0 : fx(acc);
    end
  endfunction

  // --------------------------------------------------------- bus helpers
  task automatic wr(input int t, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 1; cfg_tile = 4'(t); cfg_addr = a; cfg_wdata = d;
    @(posedge clk);
    @(negedge clk);
    cfg_valid = 0; cfg_we = 0;
  endtask

  task automatic rd(input int t, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 0; cfg_tile = 4'(t); cfg_addr = a;
    @(posedge clk);
    @(negedge clk);
    cfg_valid = 0;
    d = cfg_rdata;
    checks++;
    if (!cfg_rvalid) begin failures++; $display("FAIL no read data"); end
  endtask

  // back-to-back weight writes, one per cycle
  task automatic load_weights(input int t);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 1; cfg_tile = 4'(t); cfg_addr = REG_WT_ADDR; cfg_wdata = '0;
    for (int k = 0; k < wts[t].size(); k++) begin
      @(negedge clk);
      cfg_addr = REG_WT_DATA; cfg_wdata = 32'(wts[t][k]);
    end
    @(negedge clk);
    cfg_valid = 0; cfg_we = 0;
  endtask

  // buffer b (0..) occupies physical pages [b*BUFP, (b+1)*BUFP)
  task automatic map(input int t, input int in_buf, input int out_buf);
    for (int p = 0; p < BUFP; p++) begin
      wr(t, REG_TLB_BASE + 8'(p), 32'(in_buf * BUFP + p));
      wr(t, REG_TLB_BASE + 8'(BUFP + p), 32'(out_buf * BUFP + p));
    end
    wr(t, REG_CONF_SIZE, 32'(BUFP << PB));
  endtask

  task automatic wait_irq(input int t);
    logic [31:0] st;
    while (!irq[t]) @(posedge clk);
    rd(t, REG_STATUS, st);
    checks++;
    if (st[1] != 1'b1 || st[0] != 1'b0 || st[2] != 1'b0) begin
      failures++; $display("FAIL status %h of tile %0d", st, t);
    end
    wr(t, REG_IRQ_ACK, 1);
    n_irq++;
  endtask

  function automatic logic [31:0] p2p_word(input bit st, input bit ld, input int n,
                                          input int s0, input int s1);
    logic [31:0] r;
    r = '0;
    r[0] = st; r[1] = ld; r[3:2] = 2'(n - 1);
    r[4 +: 3] = 3'(s0 % 4); r[7 +: 3] = 3'(s0 / 4);
    r[10 +: 3] = 3'(s1 % 4); r[13 +: 3] = 3'(s1 / 4);
    return r;
  endfunction

  // DRAM words of buffer b, frame f, word w (two words per beat, low first)
  function automatic logic [15:0] dram_word(input int b, input int off_beats, input int w);
    logic [31:0] d;
    d = u_dram.mem[b * BUFP * ROWS_W + off_beats + w / 2];
    return (w % 2) ? d[31:16] : d[15:0];
  endfunction

  task automatic put_input(input int b, input logic [15:0] img [F][]);
    for (int f = 0; f < F; f++)
      for (int w = 0; w < W0; w += 2)
        u_dram.mem[b * BUFP * ROWS_W + f * W0 / 2 + w / 2] = {img[f][w+1], img[f][w]};
  endtask

  task automatic check_output(input int b, input int nwords, input logic [15:0] exp [F][],
                              input string tag);
    int bad;
    bad = 0;
    for (int f = 0; f < F; f++)
      for (int w = 0; w < nwords; w++) begin
        checks++;
        if (dram_word(b, (BUFP << PB) * 0 + f * nwords / 2, w) !== exp[f][w]) begin
          failures++;
          bad++;
          if (bad < 5) $display("FAIL %s frame %0d word %0d: %h expected %h", tag, f, w,
                                dram_word(b, f * nwords / 2, w), exp[f][w]);
        end
      end
  endtask

  // ------------------------------------------------------------ counters
  int n_p2p_sent = 0, n_p2p_served = 0, n_dma_rd = 0, n_dma_wr = 0, n_irq = 0;
  int n_served_t4 = 0, n_served_t10 = 0;
  always @(posedge clk) if (rst_n) begin
    n_p2p_sent   <= n_p2p_sent   + $countones(ev_p2p_req_sent);
    n_p2p_served <= n_p2p_served + $countones(ev_p2p_req_served);
    n_dma_rd     <= n_dma_rd     + $countones(ev_dma_read);
    n_dma_wr     <= n_dma_wr     + $countones(ev_dma_write);
    if (ev_p2p_req_served[4])  n_served_t4  <= n_served_t4 + 1;
    if (ev_p2p_req_served[10]) n_served_t10 <= n_served_t10 + 1;
  end

  logic [15:0] img [F][];
  logic [15:0] act [6][F][];
  int b4, b10;
  int dram_base_rd, dram_base_wr, dram_dma, dram_p2p, rd_tx;
  longint t_start;

  initial begin
    logic [31:0] d;
    // weights: small random values (about +-0.12 in Q.10), biases +-0.06
    for (int t = 0; t < NT; t++) begin
      int s;
      s = stage_of(t);
      if (s >= 0) begin
        for (int k = 0; k < SD[s][0] * SD[s][1]; k++) wts[t].push_back($urandom_range(0, 255) - 128);
        for (int k = 0; k < SD[s][1]; k++) wts[t].push_back($urandom_range(0, 127) - 64);
      end
    end
    for (int f = 0; f < F; f++) begin
      img[f] = new[W0];
      for (int w = 0; w < W0; w++) img[f][w] = 16'($urandom_range(0, 1023));
    end

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- phase 1: configuration
    for (int s = 0; s < 5; s++) begin
      rd(PA[s], REG_LOCATION, d);
      checks++;
      if (d != {16'(PA[s] / 4), 16'(PA[s] % 4)}) begin
        failures++; $display("FAIL LOCATION_REG of tile %0d: %h", PA[s], d);
      end
    end
    for (int s = 0; s < 5; s++) begin
      load_weights(PA[s]);
      load_weights(PBT[s]);
      map(PA[s], s, s + 1);           // pipeline A: buffers 0..5
      map(PBT[s], 6 + s, 7 + s);      // pipeline B: buffers 6..11
      wr(PA[s], REG_N_CHUNKS, F);
      wr(PBT[s], REG_N_CHUNKS, F);
    end
    $display("configured at cycle %0d", cycle);

    // reference results
    for (int f = 0; f < F; f++) begin
      act[0][f] = img[f];
      for (int s = 0; s < 5; s++) ref_layer(PA[s], s, act[s][f], act[s+1][f]);
    end

    // ---- phase 2: pipeline A, DMA only, serial
    put_input(0, img);
    dram_base_rd = u_dram.n_reads;
    dram_base_wr = u_dram.n_writes;
    t_start = cycle;
    for (int s = 0; s < 5; s++) begin
      wr(PA[s], REG_P2P, 0);
      wr(PA[s], REG_CMD, 1);
      wait_irq(PA[s]);
      // let the last write packets reach the DRAM
      repeat (200) @(posedge clk);
    end
    dram_dma = (u_dram.n_reads - dram_base_rd) + (u_dram.n_writes - dram_base_wr);
    $display("DMA pipeline: %0d cycles, %0d DRAM accesses", cycle - t_start, dram_dma);
    for (int s = 1; s <= 5; s++)
      check_output(s, SD[s-1][1], act[s], $sformatf("dma stage %0d", s));

    // ---- phase 3: pipeline B, p2p
    put_input(6, img);
    dram_base_rd = u_dram.n_reads;
    dram_base_wr = u_dram.n_writes;
    t_start = cycle;
    for (int s = 0; s < 5; s++)
      wr(PBT[s], REG_P2P, p2p_word(s != 4, s != 0, 1, (s > 0) ? PBT[s-1] : 0, 0));
    for (int s = 4; s >= 0; s--) wr(PBT[s], REG_CMD, 1);
    for (int s = 0; s < 5; s++) wait_irq(PBT[s]);
    repeat (200) @(posedge clk);
    dram_p2p = (u_dram.n_reads - dram_base_rd) + (u_dram.n_writes - dram_base_wr);
    $display("p2p pipeline: %0d cycles, %0d DRAM accesses", cycle - t_start, dram_p2p);
    // the second pipeline has other weights: recompute its reference
    begin
      logic [15:0] b [6][F][];
      for (int f = 0; f < F; f++) begin
        b[0][f] = img[f];
        for (int s = 0; s < 5; s++) ref_layer(PBT[s], s, b[s][f], b[s+1][f]);
      end
      check_output(11, SD[4][1], b[5], "p2p final");
    end
    checks++;
    if (!(dram_p2p < dram_dma)) begin
      failures++; $display("FAIL p2p DRAM accesses %0d not below DMA %0d", dram_p2p, dram_dma);
    end
    $display("DRAM accesses with p2p: %0d%% of plain DMA", dram_p2p * 100 / dram_dma);

    // ---- phase 4: two stage-1 tiles feed one stage-2 tile
    begin
      logic [15:0] exp2 [F][];
      logic [15:0] y1 [];
      // tile 4 reads frames from buffer 0, tile 10 from buffer 6 (same images)
      wr(4,  REG_P2P, p2p_word(1, 0, 1, 0, 0));
      wr(10, REG_P2P, p2p_word(1, 0, 1, 0, 0));
      wr(14, REG_P2P, p2p_word(0, 1, 2, 4, 10));
      wr(4,  REG_N_CHUNKS, F / 2);
      wr(10, REG_N_CHUNKS, F / 2);
      wr(14, REG_N_CHUNKS, F);
      // frame order at tile 14: from tile 4, from tile 10, alternately
      for (int f = 0; f < F; f++) begin
        ref_layer((f % 2) ? 10 : 4, 0, img[f / 2], y1);
        ref_layer(14, 1, y1, exp2[f]);
      end
      b4 = n_served_t4;
      b10 = n_served_t10;
      wr(14, REG_CMD, 1);
      wr(4, REG_CMD, 1);
      wr(10, REG_CMD, 1);
      wait_irq(14);
      wait_irq(4);
      wait_irq(10);
      repeat (200) @(posedge clk);
      check_output(8, SD[1][1], exp2, "two sources");
      checks++;
      if (n_served_t4 == b4 || n_served_t10 == b10) begin
        failures++; $display("FAIL two-source rotation: %0d / %0d", n_served_t4, n_served_t10);
      end
    end

    // ---- mechanisms
    rd_tx = 5 * F;
    checks++; if (n_dma_rd == 0)      begin failures++; $display("FAIL no DMA read");  end
    checks++; if (n_dma_wr == 0)      begin failures++; $display("FAIL no DMA write"); end
    checks++; if (n_p2p_sent == 0)    begin failures++; $display("FAIL no p2p request"); end
    checks++; if (n_p2p_served != n_p2p_sent) begin
      failures++; $display("FAIL p2p requests %0d served %0d", n_p2p_sent, n_p2p_served);
    end
    checks++; if (n_irq != 13)        begin failures++; $display("FAIL %0d interrupts", n_irq); end
    $display("mechanisms: dma_read=%0d dma_write=%0d p2p_req=%0d p2p_served=%0d irq=%0d two_src=%0d/%0d",
             n_dma_rd, n_dma_wr, n_p2p_sent, n_p2p_served, n_irq, n_served_t4, n_served_t10);
    checks++; if (n_dma_rd <= rd_tx) begin failures++; $display("FAIL no page-split DMA burst"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
