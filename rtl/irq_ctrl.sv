// Interrupt-request logic and run status of an accelerator tile.
//
// start (one-cycle pulse from the command register) sets running; the
// accelerator's done pulse clears running and raises the level interrupt
// irq, which stays high until software acknowledges it with ack. A done and
// an ack in the same cycle leave irq high, so no completion is lost.
// n_done counts completions since reset, for status reads. The paper only
// names the block ("interrupt-request logic"); this behaviour is this
// design's choice. In the SoC the interrupt is a wire to a top-level port
// instead of a message on the IO/IRQ NoC plane.
module irq_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        done,
  input  logic        ack,
  output logic        running,
  output logic        irq,
  output logic [15:0] n_done
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      irq     <= 1'b0;
      n_done  <= '0;
    end else begin
      if (done)       running <= 1'b0;
      else if (start) running <= 1'b1;
      if (done)       irq <= 1'b1;
      else if (ack)   irq <= 1'b0;
      if (done)       n_done <= n_done + 16'd1;
    end
  end

  a_done_while_running: assert property (@(posedge clk) disable iff (!rst_n) done |-> running);
endmodule
