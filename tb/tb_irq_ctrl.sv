// Self-checking test of irq_ctrl: start sets running, done clears it and
// raises irq, ack clears irq, done and ack together keep irq, and n_done
// counts completions. Each output is compared cycle by cycle with a model.
module tb_irq_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, done = 0, ack = 0, running, irq;
  logic [15:0] n_done;
  bit m_run = 0, m_irq = 0;
  int m_n = 0;

  irq_ctrl dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 400; k++) begin
      start = !m_run && ($urandom_range(0, 3) == 0);
      done  = m_run && ($urandom_range(0, 4) == 0);
      ack   = ($urandom_range(0, 3) == 0);
      @(posedge clk);
      if (done) begin m_run = 0; m_irq = 1; m_n++; end
      else begin
        if (start) m_run = 1;
        if (ack) m_irq = 0;
      end
      @(negedge clk);
      checks++;
      if (running != m_run || irq != m_irq || n_done != 16'(m_n)) begin
        failures++; $display("FAIL step %0d run %b/%b irq %b/%b n %0d/%0d", k, running, m_run,
                             irq, m_irq, n_done, m_n);
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
