// Self-checking test of mlp_kernel with three layers 16x8x8x4 (reuse
// factors 16, 8, 8; ReLU on the two hidden layers only). The reference
// network is computed here in fixed point. done must come
// sum(REUSE) + NL - 1 cycles after start.
module tb_mlp_kernel;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam logic [0:5][15:0] D = '{16'd16, 16'd8, 16'd8, 16'd4, 16'd0, 16'd0};
  localparam logic [0:4][15:0] RF = '{16'd16, 16'd8, 16'd8, 16'd0, 16'd0};

  logic start = 0, done, wt_we = 0;
  logic [15:0][15:0] in_vec;
  logic [3:0][15:0] out_vec;
  logic [2:0] wt_layer = 0;
  logic [19:0] wt_addr = 0;
  logic [15:0] wt_data = 0;
  int w [3][$];

  mlp_kernel #(.NL(3), .DIMS(D), .REUSE(RF), .RELU(5'b11000)) dut (.*);

  initial begin
    logic [15:0] x [], y [];
    int n;
    in_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 3; l++)
      for (int k = 0; k < D[l]*D[l+1] + D[l+1]; k++) begin
        w[l].push_back($urandom_range(0, 1023) - 512);
        @(negedge clk);
        wt_we = 1; wt_layer = 3'(l); wt_addr = 20'(k); wt_data = 16'(w[l][k]);
      end
    @(negedge clk);
    wt_we = 0;
    for (int f = 0; f < 4; f++) begin
      x = new[16];
      for (int i = 0; i < 16; i++) begin x[i] = 16'($urandom_range(0, 2047)); in_vec[i] = x[i]; end
      for (int l = 0; l < 3; l++) begin
        y = new[D[l+1]];
        for (int j = 0; j < D[l+1]; j++) begin
          longint acc;
          acc = longint'($signed(16'(w[l][D[l]*D[l+1] + j]))) * 1024;
          for (int i = 0; i < D[l]; i++) acc += longint'($signed(16'(w[l][j*D[l] + i]))) * longint'($signed(x[i]));
          acc = acc >>> 10;
          y[j] = (l < 2 && acc < 0) ? 16'd0 : acc[15:0];
        end
        x = y;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      n = 0;
      while (!done) begin @(negedge clk); n++; end
      checks++;
      if (n != 16 + 8 + 8 + 2) begin failures++; $display("FAIL latency %0d", n); end
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (out_vec[j] != x[j]) begin failures++; $display("FAIL out[%0d] %h expected %h", j, out_vec[j], x[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
