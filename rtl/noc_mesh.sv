// One NoC plane: an MX x MY 2D mesh of noc_router instances.
//
// Tile t = y*MX + x owns router (x, y); its local port appears on the
// l_* arrays at index t. Neighbouring routers are joined by a pair of
// opposite unidirectional valid/ready links (the paper's bi-directional
// links). Ports on the mesh border are tied off: nothing enters them, and
// XY routing never sends a flit to them for a destination inside the mesh
// (asserted). The SoC instantiates one noc_mesh per plane.
module noc_mesh
  import esp_pkg::*;
#(
  parameter int unsigned MX    = 4,
  parameter int unsigned MY    = 4,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned NT   = MX * MY
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic  [NT-1:0]   l_in_valid,
  output logic  [NT-1:0]   l_in_ready,
  input  flit_t [NT-1:0]   l_in_flit,
  output logic  [NT-1:0]   l_out_valid,
  input  logic  [NT-1:0]   l_out_ready,
  output flit_t [NT-1:0]   l_out_flit
);
  logic  [4:0] iv [NT];
  logic  [4:0] ir [NT];
  flit_t [4:0] idat [NT];
  logic  [4:0] ov [NT];
  logic  [4:0] orr [NT];
  flit_t [4:0] odat [NT];

  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      localparam int unsigned T = y * MX + x;

      noc_router #(.X(x), .Y(y), .DEPTH(DEPTH)) u_rt (
        .clk, .rst_n,
        .in_valid (iv[T]), .in_ready (ir[T]), .in_flit (idat[T]),
        .out_valid(ov[T]), .out_ready(orr[T]), .out_flit(odat[T])
      );

      // local port
      assign iv[T][P_L]   = l_in_valid[T];
      assign idat[T][P_L] = l_in_flit[T];
      assign l_in_ready[T] = ir[T][P_L];
      assign l_out_valid[T] = ov[T][P_L];
      assign l_out_flit[T]  = odat[T][P_L];
      assign orr[T][P_L]    = l_out_ready[T];

      // north neighbour is (x, y-1): its south output feeds our north input
      if (y > 0) begin : g_n
        assign iv[T][P_N]   = ov[T-MX][P_S];
        assign idat[T][P_N] = odat[T-MX][P_S];
        assign orr[T][P_N]  = ir[T-MX][P_S];
      end else begin : g_nb
        assign iv[T][P_N]   = 1'b0;
        assign idat[T][P_N] = '0;
        assign orr[T][P_N]  = 1'b1;
      end
      if (y < MY - 1) begin : g_s
        assign iv[T][P_S]   = ov[T+MX][P_N];
        assign idat[T][P_S] = odat[T+MX][P_N];
        assign orr[T][P_S]  = ir[T+MX][P_N];
      end else begin : g_sb
        assign iv[T][P_S]   = 1'b0;
        assign idat[T][P_S] = '0;
        assign orr[T][P_S]  = 1'b1;
      end
      if (x < MX - 1) begin : g_e
        assign iv[T][P_E]   = ov[T+1][P_W];
        assign idat[T][P_E] = odat[T+1][P_W];
        assign orr[T][P_E]  = ir[T+1][P_W];
      end else begin : g_eb
        assign iv[T][P_E]   = 1'b0;
        assign idat[T][P_E] = '0;
        assign orr[T][P_E]  = 1'b1;
      end
      if (x > 0) begin : g_w
        assign iv[T][P_W]   = ov[T-1][P_E];
        assign idat[T][P_W] = odat[T-1][P_E];
        assign orr[T][P_W]  = ir[T-1][P_E];
      end else begin : g_wb
        assign iv[T][P_W]   = 1'b0;
        assign idat[T][P_W] = '0;
        assign orr[T][P_W]  = 1'b1;
      end

      a_no_edge_n: assert property (@(posedge clk) disable iff (!rst_n) !(y == 0 && ov[T][P_N]));
      a_no_edge_s: assert property (@(posedge clk) disable iff (!rst_n) !(y == MY-1 && ov[T][P_S]));
      a_no_edge_e: assert property (@(posedge clk) disable iff (!rst_n) !(x == MX-1 && ov[T][P_E]));
      a_no_edge_w: assert property (@(posedge clk) disable iff (!rst_n) !(x == 0 && ov[T][P_W]));
    end
  end
endmodule
