// noc_router: one router of the inter-tile 2D mesh. Five ports, 0 = local
// tile, 1 = north, 2 = south, 3 = east, 4 = west (y grows southward, the DRAM
// controllers sit north of row 0). Each input has a FIFO of DEPTH flits.
// Wormhole switching: a head flit carries the packet header (pimsab_pkg::hdr_t)
// in its low bits; the output it routes to is locked to that input until the
// tail flit has passed. Dimension-ordered X-Y routing: first along x to dx,
// then along y to dy; a packet with to_dram set leaves through north after
// reaching column dx (on row 0 this is the DRAM controller). Each output
// picks among competing head flits with a round-robin arbiter.
// Links use valid/ready; a flit moves when both are high. A flit can pass an
// idle router in the cycle after it was written into the input FIFO.
// Follows the paper: wormhole, X-Y routing, input buffers, arbiter, N/S/E/W
// ports and a port to the tile (Fig 4b). Own choices: FIFO depth, the
// arbiter policy, and reaching DRAM through the north port of the top row
// instead of a separate DRAM input.
module noc_router
  import pimsab_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic  [4:0]        in_valid,
  output logic  [4:0]        in_ready,
  input  flit_t [4:0]        in_flit,
  output logic  [4:0]        out_valid,
  input  logic  [4:0]        out_ready,
  output flit_t [4:0]        out_flit
);
  localparam int P_L = 0, P_N = 1, P_S = 2, P_E = 3, P_W = 4;

  flit_t [4:0] hd;
  logic  [4:0] hv, hr;
  logic  [4:0][2:0] rt_head, rt_q, rt;   // route of the flit at each FIFO head

  for (genvar i = 0; i < 5; i++) begin : g_in
    fifo #(.T(flit_t), .DEPTH(DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_flit[i]),
      .out_valid(hv[i]), .out_ready(hr[i]), .out_data(hd[i]), .count()
    );
  end

  function automatic logic [2:0] route(hdr_t h, logic [COORD_W-1:0] x, logic [COORD_W-1:0] y);
    if (h.dx > x)                 return 3'(P_E);
    else if (h.dx < x)            return 3'(P_W);
    else if (h.to_dram)           return 3'(P_N);
    else if (h.dy > y)            return 3'(P_S);
    else if (h.dy < y)            return 3'(P_N);
    else                          return 3'(P_L);
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      rt_head[i] = route(hdr_t'(hd[i].data[HDR_W-1:0]), my_x, my_y);
      rt[i]      = hd[i].head ? rt_head[i] : rt_q[i];
    end
  end

  // Output allocation
  logic [4:0]       busy_q;
  logic [4:0][2:0]  own_q, own, rr_q;
  logic [4:0]       has_own;

  always_comb begin
    for (int o = 0; o < 5; o++) begin
      own[o]     = own_q[o];
      has_own[o] = busy_q[o];
      if (!busy_q[o]) begin
        for (int k = 0; k < 5; k++) begin
          automatic int i = (int'(rr_q[o]) + k) % 5;
          if (!has_own[o] && hv[i] && hd[i].head && int'(rt[i]) == o) begin
            own[o]     = 3'(i);
            has_own[o] = 1'b1;
          end
        end
      end
      out_valid[o] = has_own[o] && hv[own[o]] && int'(rt[own[o]]) == o;
      out_flit[o]  = hd[own[o]];
    end
    for (int i = 0; i < 5; i++) begin
      hr[i] = 1'b0;
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && int'(own[o]) == i && out_ready[o]) hr[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= '0; own_q <= '0; rr_q <= '0; rt_q <= '0;
    end else begin
      for (int i = 0; i < 5; i++)
        if (hv[i] && hr[i] && hd[i].head) rt_q[i] <= rt_head[i];
      for (int o = 0; o < 5; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          busy_q[o] <= !out_flit[o].tail;
          own_q[o]  <= own[o];
          if (out_flit[o].head) rr_q[o] <= (own[o] == 3'd4) ? 3'd0 : own[o] + 3'd1;
        end
      end
    end
  end

  // A locked output only ever carries flits of its owner's packet.
  for (genvar o = 0; o < 5; o++) begin : g_chk
    a_wormhole: assert property (@(posedge clk) disable iff (!rst_n)
      (out_valid[o] && busy_q[o]) |-> !out_flit[o].head);
  end
endmodule
