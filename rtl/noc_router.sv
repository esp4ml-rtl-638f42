// Five-port wormhole router of one packet-switched 2D-mesh NoC plane.
//
// Ports are N, S, E, W and the local tile (esp_pkg::P_*). Every input has a
// shallow FIFO; the head flit of a packet is routed dimension-ordered (first
// along x, then along y), which keeps the mesh free of routing deadlock.
// An output is granted to one input at a time, round-robin among the head
// flits that want it, and stays locked to that input until the tail flit
// has passed (wormhole switching). All links use valid/ready: a flit moves
// when both are high. A flit crosses a router in one cycle after it is in
// the input FIFO, so the minimum latency is one cycle per hop plus one.
// The paper states only that the NoC is a packet-switched 2D mesh of
// configurable-width planes; the switching, routing, arbitration and queue
// depth here are this design's choices.
module noc_router
  import esp_pkg::*;
#(
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned DEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic  [4:0]     in_valid,
  output logic  [4:0]     in_ready,
  input  flit_t [4:0]     in_flit,
  output logic  [4:0]     out_valid,
  input  logic  [4:0]     out_ready,
  output flit_t [4:0]     out_flit
);
  localparam int unsigned FW = $bits(flit_t);

  logic  [4:0] f_empty, f_full, f_pop;
  flit_t [4:0] f_data;
  logic  [2:0] want [5];

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.W(FW), .DEPTH(DEPTH)) u_q (
      .clk, .rst_n,
      .push (in_valid[i] && in_ready[i]),
      .din  (in_flit[i]),
      .full (f_full[i]),
      .pop  (f_pop[i]),
      .dout (f_data[i]),
      .empty(f_empty[i]),
      .count()
    );
    assign in_ready[i] = !f_full[i];

    // XY routing of the head flit at the front of this input queue
    always_comb begin
      hdr_t h;
      h = hdr_t'(f_data[i].data);
      if      (32'(h.dst_x) > X) want[i] = 3'(P_E);
      else if (32'(h.dst_x) < X) want[i] = 3'(P_W);
      else if (32'(h.dst_y) > Y) want[i] = 3'(P_S);
      else if (32'(h.dst_y) < Y) want[i] = 3'(P_N);
      else                       want[i] = 3'(P_L);
    end
  end

  logic [4:0] busy_q;
  logic [2:0] owner_q [5];
  logic [2:0] rr_q    [5];
  logic [4:0] gnt_v;
  logic [2:0] gnt_i   [5];
  logic [2:0] cur_i   [5];

  always_comb begin
    int unsigned c;
    c         = 0;
    out_valid = '0;
    for (int o = 0; o < 5; o++) cur_i[o] = '0;
    for (int o = 0; o < 5; o++) begin
      gnt_v[o]    = 1'b0;
      gnt_i[o]    = '0;
      out_flit[o] = '0;
      if (!busy_q[o]) begin
        // round-robin search starting at rr_q[o]
        for (int k = 4; k >= 0; k--) begin
          c = (32'(rr_q[o]) + 32'(k)) % 5;
          if (!f_empty[c] && f_data[c].head && want[c] == 3'(o)) begin
            gnt_v[o] = 1'b1;
            gnt_i[o] = 3'(c);
          end
        end
      end
      cur_i[o] = busy_q[o] ? owner_q[o] : gnt_i[o];
      if (busy_q[o] || gnt_v[o]) begin
        out_valid[o] = !f_empty[cur_i[o]];
        out_flit[o]  = f_data[cur_i[o]];
      end
    end
  end

  // Pops are kept apart from the output mux so that out_ready never feeds
  // out_valid or out_flit, not even as a false path.
  always_comb begin
    f_pop = '0;
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) f_pop[cur_i[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= '0;
      for (int o = 0; o < 5; o++) begin
        owner_q[o] <= '0;
        rr_q[o]    <= '0;
      end
    end else begin
      for (int o = 0; o < 5; o++) begin
        if (gnt_v[o]) begin
          owner_q[o] <= gnt_i[o];
          rr_q[o]    <= (gnt_i[o] == 3'd4) ? 3'd0 : gnt_i[o] + 3'd1;
        end
        if (out_valid[o] && out_ready[o] && out_flit[o].tail) busy_q[o] <= 1'b0;
        else if (gnt_v[o])                                    busy_q[o] <= 1'b1;
      end
    end
  end

  // A flit must never be routed back out of the port it came in on.
  for (genvar i = 0; i < 4; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
      (!f_empty[i] && f_data[i].head) |-> (want[i] != 3'(i)));
  end
endmodule
