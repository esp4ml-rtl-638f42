// Multilayer perceptron: the COMPUTE kernel that hls4ml generates for a
// fully connected Keras model, as a chain of NL dense_layer stages.
//
// DIMS[0..NL] are the layer widths (DIMS[0] inputs, DIMS[NL] outputs),
// REUSE[l] the reuse factor of layer l and RELU[l] whether layer l applies
// ReLU. Layers run one after the other on one frame: start pulses with
// in_vec valid (held until done); done pulses when the last layer has
// finished, sum(REUSE[l]) + NL - 1 cycles later, with out_vec valid until
// the next start. Weight writes select a layer with wt_layer.
// The defaults are the paper's digit classifier, 1024x256x128x64x32x10.
// The denoiser (1024x256x128x1024) and each stage of the partitioned
// classifier are other settings of the same parameters. The reuse factors
// and the activations (ReLU on hidden layers, none on the output layer) are
// this design's choices; the paper gives neither.
module mlp_kernel #(
  parameter int unsigned NL = 5,
  parameter logic [0:5][15:0] DIMS  = '{16'd1024, 16'd256, 16'd128, 16'd64, 16'd32, 16'd10},
  parameter logic [0:4][15:0] REUSE = '{16'd4096, 16'd4096, 16'd4096, 16'd2048, 16'd320},
  parameter logic [0:4]       RELU  = 5'b11110,
  parameter int unsigned FRAC = 10,
  localparam int unsigned N_IN  = DIMS[0],
  localparam int unsigned N_OUT = DIMS[NL]
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   done,
  input  logic [N_IN-1:0][15:0]  in_vec,
  output logic [N_OUT-1:0][15:0] out_vec,
  input  logic                   wt_we,
  input  logic [2:0]             wt_layer,
  input  logic [19:0]            wt_addr,
  input  logic [15:0]            wt_data
);
  localparam int unsigned MAXD = 1024;

  logic [MAXD-1:0][15:0] act [NL+1];
  logic [NL-1:0] st_done;

  assign act[0] = (MAXD*16)'(in_vec);

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned NI = DIMS[l];
    localparam int unsigned NO = DIMS[l+1];
    logic [NO-1:0][15:0] o;

    dense_layer #(
      .N_IN(NI), .N_OUT(NO), .REUSE(REUSE[l]), .RELU(RELU[l]), .FRAC(FRAC)
    ) u_dense (
      .clk, .rst_n,
      .start  ((l == 0) ? start : st_done[(l == 0) ? 0 : l-1]),
      .busy   (),
      .done   (st_done[l]),
      .in_vec (act[l][NI-1:0]),
      .out_vec(o),
      .wt_we  (wt_we && wt_layer == 3'(l)),
      .wt_addr, .wt_data
    );
    assign act[l+1] = (MAXD*16)'(o);
  end

  assign done    = st_done[NL-1];
  assign out_vec = act[NL][N_OUT-1:0];
endmodule
