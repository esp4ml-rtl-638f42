// Behavioural model of the off-chip memory behind the memory tile (not
// synthesizable design content: the DRAM and its controller are outside the
// SoC). Word-addressed, 32-bit words, WORDS deep. Requests are accepted when
// mem_req_ready is high (randomly low when STALL is set); read data return
// in order LAT cycles after the request. It counts reads and writes, which
// is how the tests compare DRAM traffic with and without p2p.
module dram_model #(
  parameter int unsigned PA_W  = 24,
  parameter int unsigned WORDS = 1 << 17,
  parameter int unsigned LAT   = 3,
  parameter bit          STALL = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            mem_req_valid,
  output logic            mem_req_ready,
  input  logic            mem_req_we,
  input  logic [PA_W-1:0] mem_req_addr,
  input  logic [31:0]     mem_req_wdata,
  output logic            mem_rvalid,
  output logic [31:0]     mem_rdata
);
  logic [31:0] mem [WORDS];
  int unsigned n_reads = 0, n_writes = 0;
  logic [LAT-1:0]       pv;
  logic [31:0]          pd [LAT];

  initial begin
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_req_ready <= 1'b1;
      pv <= '0;
    end else begin
      mem_req_ready <= STALL ? ($urandom_range(0, 7) != 0) : 1'b1;
      pv[0] <= mem_req_valid && mem_req_ready && !mem_req_we;
      pd[0] <= mem[32'(mem_req_addr) % WORDS];
      for (int i = 1; i < int'(LAT); i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_we) begin
          mem[32'(mem_req_addr) % WORDS] <= mem_req_wdata;
          n_writes <= n_writes + 1;
        end else begin
          n_reads <= n_reads + 1;
        end
      end
    end
  end
  assign mem_rvalid = pv[LAT-1];
  assign mem_rdata  = pd[LAT-1];
endmodule
