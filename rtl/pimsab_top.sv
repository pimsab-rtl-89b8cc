// pimsab_top: the PIMSAB chip. MESH_X x MESH_Y tiles, each beside a router
// of a 2D mesh NoC (wormhole, X-Y routing); one DRAM controller (with its
// transpose unit) above every router of the top row, so the DRAM bandwidth
// is MESH_X * 1024 bits per clock. Tile (x,y) is at index y*MESH_X + x, y = 0
// being the row next to DRAM.
// Ports: per tile an instruction push port (the host interface, PCIe in the
// paper, is outside this design) and a busy flag; per column a DRAM port as
// described in dram_ctrl (the HBM stacks and PHYs are outside).
// Follows the paper: 12x10 mesh of tiles, 256 CRAMs of 256x256 per tile,
// DRAM controllers only on the top edge. Own choices: port protocols.
module pimsab_top
  import pimsab_pkg::*;
#(
  parameter int MESH_X = 12,
  parameter int MESH_Y = 10,
  parameter int NCRAM  = 256,
  parameter int ROWS   = 256,
  parameter int COLS   = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // host instruction ports, one per tile
  input  logic   [MESH_Y*MESH_X-1:0]     instr_valid,
  output logic   [MESH_Y*MESH_X-1:0]     instr_ready,
  input  instr_t [MESH_Y*MESH_X-1:0]     instr,
  output logic   [MESH_Y*MESH_X-1:0]     busy,
  // DRAM channel ports, one per column
  output logic   [MESH_X-1:0]            dram_req_valid,
  input  logic   [MESH_X-1:0]            dram_req_ready,
  output logic   [MESH_X-1:0]            dram_req_we,
  output logic   [MESH_X-1:0][31:0]      dram_req_addr,
  output logic   [MESH_X-1:0][FLIT_W-1:0] dram_req_wdata,
  input  logic   [MESH_X-1:0]            dram_rsp_valid,
  input  logic   [MESH_X-1:0][FLIT_W-1:0] dram_rsp_data
);
  localparam int NT = MESH_X * MESH_Y;
  localparam int P_L = 0, P_N = 1, P_S = 2, P_E = 3, P_W = 4;

  // router port signals, [tile][port]
  logic  [NT-1:0][4:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [NT-1:0][4:0] r_in_flit, r_out_flit;

  // DRAM controller <-> top-row north ports
  logic  [MESH_X-1:0] d_in_valid, d_in_ready, d_out_valid, d_out_ready;
  flit_t [MESH_X-1:0] d_in_flit, d_out_flit;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int T = y * MESH_X + x;

      noc_router u_router (
        .clk, .rst_n, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .in_valid(r_in_valid[T]), .in_ready(r_in_ready[T]), .in_flit(r_in_flit[T]),
        .out_valid(r_out_valid[T]), .out_ready(r_out_ready[T]), .out_flit(r_out_flit[T])
      );

      tile #(.NCRAM(NCRAM), .ROWS(ROWS), .COLS(COLS)) u_tile (
        .clk, .rst_n, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .instr_valid(instr_valid[T]), .instr_ready(instr_ready[T]), .instr(instr[T]),
        .busy(busy[T]),
        .noc_out_valid(r_in_valid[T][P_L]), .noc_out_ready(r_in_ready[T][P_L]),
        .noc_out_flit(r_in_flit[T][P_L]),
        .noc_in_valid(r_out_valid[T][P_L]), .noc_in_ready(r_out_ready[T][P_L]),
        .noc_in_flit(r_out_flit[T][P_L])
      );

      // north
      if (y == 0) begin : g_dram
        assign r_in_valid[T][P_N]  = d_out_valid[x];
        assign r_in_flit[T][P_N]   = d_out_flit[x];
        assign d_out_ready[x]      = r_in_ready[T][P_N];
        assign d_in_valid[x]       = r_out_valid[T][P_N];
        assign d_in_flit[x]        = r_out_flit[T][P_N];
        assign r_out_ready[T][P_N] = d_in_ready[x];

        dram_ctrl u_dram (
          .clk, .rst_n, .my_x(COORD_W'(x)),
          .noc_in_valid(d_in_valid[x]), .noc_in_ready(d_in_ready[x]), .noc_in_flit(d_in_flit[x]),
          .noc_out_valid(d_out_valid[x]), .noc_out_ready(d_out_ready[x]), .noc_out_flit(d_out_flit[x]),
          .req_valid(dram_req_valid[x]), .req_ready(dram_req_ready[x]), .req_we(dram_req_we[x]),
          .req_addr(dram_req_addr[x]), .req_wdata(dram_req_wdata[x]),
          .rsp_valid(dram_rsp_valid[x]), .rsp_data(dram_rsp_data[x])
        );
      end else begin : g_n
        assign r_in_valid[T][P_N]  = r_out_valid[T-MESH_X][P_S];
        assign r_in_flit[T][P_N]   = r_out_flit[T-MESH_X][P_S];
        assign r_out_ready[T][P_N] = r_in_ready[T-MESH_X][P_S];
      end
      // south
      if (y == MESH_Y - 1) begin : g_s_edge
        assign r_in_valid[T][P_S]  = 1'b0;
        assign r_in_flit[T][P_S]   = '0;
        assign r_out_ready[T][P_S] = 1'b1;   // X-Y routing never sends off the edge
      end else begin : g_s
        assign r_in_valid[T][P_S]  = r_out_valid[T+MESH_X][P_N];
        assign r_in_flit[T][P_S]   = r_out_flit[T+MESH_X][P_N];
        assign r_out_ready[T][P_S] = r_in_ready[T+MESH_X][P_N];
      end
      // east
      if (x == MESH_X - 1) begin : g_e_edge
        assign r_in_valid[T][P_E]  = 1'b0;
        assign r_in_flit[T][P_E]   = '0;
        assign r_out_ready[T][P_E] = 1'b1;
      end else begin : g_e
        assign r_in_valid[T][P_E]  = r_out_valid[T+1][P_W];
        assign r_in_flit[T][P_E]   = r_out_flit[T+1][P_W];
        assign r_out_ready[T][P_E] = r_in_ready[T+1][P_W];
      end
      // west
      if (x == 0) begin : g_w_edge
        assign r_in_valid[T][P_W]  = 1'b0;
        assign r_in_flit[T][P_W]   = '0;
        assign r_out_ready[T][P_W] = 1'b1;
      end else begin : g_w
        assign r_in_valid[T][P_W]  = r_out_valid[T-1][P_E];
        assign r_in_flit[T][P_W]   = r_out_flit[T-1][P_E];
        assign r_out_ready[T][P_W] = r_in_ready[T-1][P_E];
      end
    end
  end
endmodule
