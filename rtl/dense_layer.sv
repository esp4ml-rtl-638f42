// Fully connected neural-network layer in 16-bit fixed point, with its
// parallelism set by an hls4ml-style reuse factor.
//
// out[j] = act( bias[j] + sum_i W[j][i] * in[i] ),  j < N_OUT, i < N_IN,
// where act is ReLU when RELU is set and the identity otherwise. Words are
// signed with FRAC fractional bits; products are summed at full precision
// and the sum is shifted back by FRAC bits, truncating, and wrapped to 16
// bits (the default quantization and overflow modes of hls4ml's fixed-point
// type).
//
// REUSE is the number of times each multiplier is used per layer, as in
// hls4ml: the layer has LANES = N_IN*N_OUT/REUSE multipliers and takes
// REUSE cycles. Each cycle it multiplies LANES consecutive inputs of one
// output neuron by their weights and adds them to that neuron's sum, so
// REUSE must be a multiple of N_OUT. Pulse start with in_vec valid (and
// held); done pulses REUSE cycles later with out_vec updated.
//
// Weights and biases are written through wt_*: address j*N_IN+i holds
// W[j][i], address N_IN*N_OUT+j holds bias[j]. In an hls4ml accelerator they
// are constants compiled into the design; here they are loaded at run time
// so that one RTL serves any trained model.
// From the paper: 16-bit fixed point, the reuse factor, the layer sizes.
// This design's own: the fractional width, the schedule, the weight port.
module dense_layer #(
  parameter int unsigned N_IN  = 32,
  parameter int unsigned N_OUT = 10,
  parameter int unsigned REUSE = 320,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned FRAC  = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic [N_IN-1:0][15:0]  in_vec,
  output logic [N_OUT-1:0][15:0] out_vec,
  input  logic                   wt_we,
  input  logic [19:0]            wt_addr,
  input  logic [15:0]            wt_data
);
  localparam int unsigned LANES  = (N_IN * N_OUT) / REUSE;
  localparam int unsigned GROUPS = N_IN / LANES;     // cycles per output neuron
  localparam int unsigned ROWS   = N_OUT * GROUPS;   // == REUSE
  localparam int unsigned NW     = N_IN * N_OUT;
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned JW     = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned AW     = 48;

  if (LANES * REUSE != NW || LANES * GROUPS != N_IN || LANES == 0) begin : g_bad
    $error("dense_layer: REUSE must divide N_IN*N_OUT and be a multiple of N_OUT");
  end

  logic [LANES-1:0][15:0] wmem [ROWS];
  logic [15:0]            bmem [N_OUT];

  // weight / bias loading
  always_ff @(posedge clk) begin
    if (wt_we) begin
      if (32'(wt_addr) < NW) wmem[32'(wt_addr) / LANES][32'(wt_addr) % LANES] <= wt_data;
      else if (32'(wt_addr) < NW + N_OUT) bmem[32'(wt_addr) - NW] <= wt_data;
    end
  end

  logic [RW-1:0] r_q;
  logic [GW-1:0] g_q;
  logic [JW-1:0] j_q;
  logic signed [AW-1:0] acc_q, psum, nacc, shifted;
  logic [LANES-1:0][15:0] wrow;

  assign wrow = wmem[r_q];

  always_comb begin
    psum = '0;
    for (int l = 0; l < LANES; l++) begin
      psum += AW'($signed(wrow[l])) * AW'($signed(in_vec[32'(g_q) * LANES + 32'(l)]));
    end
    nacc    = ((g_q == '0) ? (AW'($signed(bmem[j_q])) <<< FRAC) : acc_q) + psum;
    shifted = nacc >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      r_q     <= '0;
      g_q     <= '0;
      j_q     <= '0;
      acc_q   <= '0;
      out_vec <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          r_q  <= '0;
          g_q  <= '0;
          j_q  <= '0;
        end
      end else begin
        r_q <= r_q + 1'b1;
        if (32'(g_q) == GROUPS - 1) begin
          out_vec[j_q] <= (RELU && shifted[AW-1]) ? 16'd0 : shifted[15:0];
          g_q <= '0;
          j_q <= j_q + 1'b1;
          if (32'(j_q) == N_OUT - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          acc_q <= nacc;
          g_q   <= g_q + 1'b1;
        end
      end
    end
  end
endmodule
