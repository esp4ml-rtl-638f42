// Workload test: the denoiser feeding the classifier, both at full size.
//
// The same SoC top is given another floorplan: tile 0 (0,0) holds the
// denoiser autoencoder 1024x256x128x1024, tile 1 (1,0) the memory tile,
// tile 4 (0,1) the whole classifier 1024x256x128x64x32x10 in one
// accelerator; the other tiles are empty or external. Noisy frames are placed in memory; the denoiser
// reads them by DMA and hands each cleaned frame to the classifier by p2p
// (p2p store on tile 0, p2p load from source (0,0) on tile 2); the
// classifier writes ten scores per frame to memory. The scores are
// compared with a fixed-point model of both networks computed here, and
// the p2p requests, DMA traffic and interrupts are counted.
module tb_soc_den_cls;
  import esp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NT = 16, F = 2, PB = 10;
  localparam int DEN = 0, CLS = 4;
  localparam int ACCS [2] = '{DEN, CLS};

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
    .MEM_X(1), .MEM_Y(0),
    .TILE_TYPE ('{0: T_ACC, 1: T_MEM, 2: T_AUX, 4: T_ACC, default: T_EMPTY}),
    .TILE_NL   ('{0: 3'd3, 4: 3'd5, default: 3'd1}),
    .TILE_DIMS ('{0: DEN_DIMS, 4: CLS_DIMS, default: NO_DIMS}),
    .TILE_REUSE('{0: DEN_REUSE, 4: CLS_REUSE, default: NO_REUSE}),
    .TILE_RELU ('{0: DEN_RELU, 4: CLS_RELU, default: OUT_RELU})
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

  dram_model #(.PA_W(24), .WORDS(1 << 16), .LAT(3), .STALL(1'b1)) u_dram (
    .clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_req_wdata, .mem_rvalid, .mem_rdata
  );

  int n_sent = 0, n_served = 0, n_rd = 0, n_wr = 0, n_irq = 0;
  always @(posedge clk) if (rst_n) begin
    n_sent   <= n_sent   + $countones(ev_p2p_req_sent);
    n_served <= n_served + $countones(ev_p2p_req_served);
    n_rd     <= n_rd     + $countones(ev_dma_read);
    n_wr     <= n_wr     + $countones(ev_dma_write);
  end

  task automatic wr(input int t, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 1; cfg_tile = 4'(t); cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_valid = 0; cfg_we = 0;
  endtask

  task automatic rd(input int t, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 0; cfg_tile = 4'(t); cfg_addr = a;
    @(negedge clk);
    cfg_valid = 0;
    d = cfg_rdata;
  endtask

  // weights of every layer: W[j][i] at j*N_IN+i, biases after the matrix
  int wts [2][5][$];

  task automatic load_layer(input int t, input int k, input int l);
    wr(t, REG_WT_ADDR, {9'd0, 3'(l), 20'd0});
    @(negedge clk);
    cfg_valid = 1; cfg_we = 1; cfg_tile = 4'(t); cfg_addr = REG_WT_DATA;
    for (int a = 0; a < wts[k][l].size(); a++) begin
      cfg_wdata = 32'(wts[k][l][a]);
      @(negedge clk);
    end
    cfg_valid = 0; cfg_we = 0;
  endtask

  function automatic void ref_net(input int k, input dims_t d, input int nl, input relu_t rl,
                                  input logic [15:0] x [], output logic [15:0] y []);
    logic [15:0] cur [];
    cur = x;
    for (int l = 0; l < nl; l++) begin
      int ni, no;
      ni = d[l]; no = d[l+1];
      y = new[no];
      for (int j = 0; j < no; j++) begin
        longint acc;
        acc = longint'($signed(16'(wts[k][l][ni*no + j]))) * 1024;
        for (int i = 0; i < ni; i++)
          acc += longint'($signed(16'(wts[k][l][j*ni + i]))) * longint'($signed(cur[i]));
        acc = acc >>> 10;
        y[j] = (rl[l] && acc < 0) ? 16'd0 : acc[15:0];
      end
      cur = y;
    end
  endfunction

  initial begin
    logic [31:0] d;
    logic [15:0] img [F][], mid [], score [];
    longint t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(DEN, REG_LOCATION, d); checks++; if (d != 32'h0) begin failures++; $display("FAIL location %h", d); end
    rd(CLS, REG_LOCATION, d); checks++; if (d != {16'd1, 16'd0}) begin failures++; $display("FAIL location %h", d); end
    // weights
    for (int l = 0; l < 3; l++) begin
      for (int a = 0; a < DEN_DIMS[l] * DEN_DIMS[l+1] + DEN_DIMS[l+1]; a++) wts[0][l].push_back($urandom_range(0, 127) - 64);
      load_layer(DEN, 0, l);
    end
    for (int l = 0; l < 5; l++) begin
      for (int a = 0; a < CLS_DIMS[l] * CLS_DIMS[l+1] + CLS_DIMS[l+1]; a++) wts[1][l].push_back($urandom_range(0, 255) - 128);
      load_layer(CLS, 1, l);
    end
    // input frames at physical page 0; the denoiser reads virtual page 0
    for (int f = 0; f < F; f++) begin
      img[f] = new[1024];
      for (int w = 0; w < 1024; w++) img[f][w] = 16'($urandom_range(0, 1023));
      for (int w = 0; w < 1024; w += 2) u_dram.mem[f * 512 + w / 2] = {img[f][w+1], img[f][w]};
    end
    wr(DEN, REG_TLB_BASE + 0, 0);
    wr(DEN, REG_N_CHUNKS, F);
    wr(DEN, REG_CONF_SIZE, 1 << PB);
    wr(DEN, REG_P2P, 32'h1);                              // p2p store
    // classifier output: virtual page 1 -> physical page 4
    wr(CLS, REG_TLB_BASE + 1, 4);
    wr(CLS, REG_N_CHUNKS, F);
    wr(CLS, REG_CONF_SIZE, 1 << PB);
    wr(CLS, REG_P2P, 32'h2);                              // p2p load, one source at (0,0)
    t0 = 0;
    wr(CLS, REG_CMD, 1);
    wr(DEN, REG_CMD, 1);
    for (int n = 0; n < 2_000_000 && !(irq[DEN] && irq[CLS]); n++) begin @(negedge clk); t0++; end
    $display("denoiser + classifier: %0d frames in %0d cycles", F, t0);
    foreach (ACCS[k]) begin
      int t;
      t = ACCS[k];
      rd(t, REG_STATUS, d);
      checks++;
      if (d[2:0] != 3'b010) begin failures++; $display("FAIL status %h of tile %0d", d, t); end
      else n_irq++;
      wr(t, REG_IRQ_ACK, 0);
    end
    for (int f = 0; f < F; f++) begin
      ref_net(0, DEN_DIMS, 3, DEN_RELU, img[f], mid);
      ref_net(1, CLS_DIMS, 5, CLS_RELU, mid, score);
      for (int w = 0; w < 10; w++) begin
        logic [31:0] b;
        logic [15:0] got;
        b = u_dram.mem[4 * 1024 + f * 5 + w / 2];
        got = (w % 2) ? b[31:16] : b[15:0];
        checks++;
        if (got != score[w]) begin failures++; $display("FAIL frame %0d score %0d: %h expected %h", f, w, got, score[w]); end
      end
    end
    // mechanisms: p2p requests sent and served, DMA only at the two ends
    checks++; if (n_sent != F || n_served != F) begin failures++; $display("FAIL p2p %0d/%0d", n_sent, n_served); end
    checks++; if (n_rd != F || n_wr != F) begin failures++; $display("FAIL DMA %0d reads %0d writes", n_rd, n_wr); end
    checks++; if (n_irq != 2) begin failures++; $display("FAIL interrupts %0d", n_irq); end
    $display("p2p requests %0d, DMA reads %0d, DMA writes %0d, DRAM accesses %0d",
             n_sent, n_rd, n_wr, u_dram.n_reads + u_dram.n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
