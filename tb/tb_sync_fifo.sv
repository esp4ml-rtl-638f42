// Self-checking test of sync_fifo (depth 3, so the pointers wrap at a
// non-power-of-two): random push and pop, never past full or empty;
// every word must come out once, in order, with full, empty and count
// matching a reference model.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, pop = 0, full, empty;
  logic [7:0] din = 0, dout;
  logic [1:0] count;
  logic [7:0] q [$];

  sync_fifo #(.W(8), .DEPTH(3)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      checks++;
      if (count != 2'(q.size()) || full != (q.size() == 3) || empty != (q.size() == 0)) begin
        failures++; $display("FAIL flags: count %0d, model %0d", count, q.size());
      end
      push = !full && $urandom_range(0, 1);
      pop  = !empty && $urandom_range(0, 1);
      din  = 8'($urandom);
      if (pop) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("FAIL data %h expected %h", dout, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(din);
      @(negedge clk);
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
