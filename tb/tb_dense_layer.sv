// Self-checking test of dense_layer (16 inputs, 4 outputs, reuse factor 8,
// so 8 multipliers and 2 cycles per neuron). Random weights, biases and
// inputs, positive and negative; the expected outputs are computed here in
// fixed point (Q6.10, truncating shift, wrap to 16 bits, ReLU). done must
// come exactly REUSE cycles after start. Two frames, and a reload of one
// weight between them.
module tb_dense_layer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NI = 16, NO = 4, R = 8;

  logic start = 0, busy, done, wt_we = 0;
  logic [NI-1:0][15:0] in_vec;
  logic [NO-1:0][15:0] out_vec;
  logic [19:0] wt_addr = 0;
  logic [15:0] wt_data = 0;
  int w [NI*NO + NO];

  dense_layer #(.N_IN(NI), .N_OUT(NO), .REUSE(R), .RELU(1'b1), .FRAC(10)) dut (.*);

  task automatic wwrite(input int a, input int d);
    @(negedge clk);
    wt_we = 1; wt_addr = 20'(a); wt_data = 16'(d);
    @(negedge clk);
    wt_we = 0;
  endtask

  task automatic frame();
    int n;
    for (int i = 0; i < NI; i++) in_vec[i] = 16'($urandom_range(0, 4095) - 2048);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    n = 0;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (n != R) begin failures++; $display("FAIL latency %0d, expected %0d", n, R); end
    for (int j = 0; j < NO; j++) begin
      longint acc;
      logic [15:0] e;
      acc = longint'($signed(16'(w[NI*NO + j]))) * 1024;
      for (int i = 0; i < NI; i++) acc += longint'($signed(16'(w[j*NI + i]))) * longint'($signed(in_vec[i]));
      acc = acc >>> 10;
      e = (acc < 0) ? 16'd0 : acc[15:0];
      checks++;
      if (out_vec[j] != e) begin failures++; $display("FAIL out[%0d] %h expected %h", j, out_vec[j], e); end
    end
  endtask

  initial begin
    in_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NI*NO + NO; k++) begin
      w[k] = $urandom_range(0, 2047) - 1024;
      wwrite(k, w[k]);
    end
    for (int f = 0; f < 6; f++) frame();
    w[5] = 16'h0400;
    wwrite(5, w[5]);
    frame();
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
