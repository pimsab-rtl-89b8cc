// cram: one compute-enabled dual-port SRAM (CRAM) with its row of PEs.
// ROWS wordlines x COLS bitlines; element data is stored transposed, one bit
// per wordline, so every bitline is a SIMD lane.
//
// Compute mode (uop_valid): in one cycle rows uop.row_a and uop.row_b are read
// on the two ports, the PE row computes, and port 1 / port 2 write rows
// uop.row_w1 / uop.row_w2 under predication at the clock edge.
// Memory mode: mem_rd_row is read combinationally on port 1 (mem_rdata), and
// mem_we writes mem_wdata to mem_wr_row through the PE's W1 data-in path
// (unpredicated). A memory-mode write takes priority over a micro-op in the
// same cycle; the tile controller never issues both.
// When uop.bk_en is set the port-2 operand is the constant bit uop.bk on
// every bitline instead of row_b (used to add a register-file constant).
// Shift links: sh_from_left/right enter the outer PEs; sh_to_left/right leave
// them; the tile wires them into a ring.
//
// Follows the paper: dual-port array, two modes, 1 micro-op per cycle, PEs at
// the bitlines. Own choices: micro-op delivered on a dedicated bus instead of
// through the write port; array modelled as a register array (the real part
// is an SRAM macro); contents are not reset; the constant-bit override of
// port 2.
module cram
  import pimsab_pkg::*;
#(
  parameter int ROWS = 256,
  parameter int COLS = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  uop_t             uop,
  input  logic             uop_valid,
  input  logic             mem_we,
  input  logic [ROW_W-1:0] mem_wr_row,
  input  logic [COLS-1:0]  mem_wdata,
  input  logic [ROW_W-1:0] mem_rd_row,
  output logic [COLS-1:0]  mem_rdata,
  input  logic             sh_from_left,
  input  logic             sh_from_right,
  output logic             sh_to_left,
  output logic             sh_to_right
);

  logic [COLS-1:0] mem [ROWS];

  logic [COLS-1:0] a, b, wd1, wd2, we1, we2;
  logic [COLS-1:0] carry_q, mask_q;
  uop_t            u;

  // In memory mode the controller-side write becomes a port-1 d_in write.
  always_comb begin
    u = uop;
    if (!uop_valid) begin
      u.wps1 = 1'b0; u.wps2 = 1'b0;
      u.c_en = 1'b0; u.c_rst = 1'b0; u.m_en = 1'b0; u.m_rst = 1'b0;
    end
    if (mem_we) begin
      u = '0;
      u.row_w1 = mem_wr_row;
      u.sel1   = WSEL_DIN;
      u.wps1   = 1'b1;
      u.pred   = PRED_NONE;
    end
  end

  assign a = mem[u.row_a];
  assign b = u.bk_en ? {COLS{u.bk}} : mem[u.row_b];
  assign mem_rdata = mem[mem_rd_row];

  pe #(.N(COLS)) u_pe (
    .clk, .rst_n, .a, .b, .tr(u.tr), .sel1(u.sel1), .sel2(u.sel2),
    .wps1(u.wps1), .wps2(u.wps2), .pred(u.pred),
    .c_en(u.c_en), .c_rst(u.c_rst), .m_en(u.m_en), .m_rst(u.m_rst),
    .d_in1(mem_wdata), .d_in2(mem_wdata),
    .from_left(sh_from_left), .from_right(sh_from_right),
    .to_left(sh_to_left), .to_right(sh_to_right),
    .wd1, .wd2, .we1, .we2, .carry(carry_q), .mask(mask_q)
  );

  // Port 2 is written after port 1, so it wins on a same-row collision.
  always_ff @(posedge clk) begin
    if (|we1) mem[u.row_w1] <= (mem[u.row_w1] & ~we1) | (wd1 & we1);
    if (|we2) mem[u.row_w2] <= (mem[u.row_w2] & ~we2) | (wd2 & we2);
  end

endmodule
