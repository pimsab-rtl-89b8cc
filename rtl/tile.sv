// tile: one PIMSAB compute tile. NCRAM CRAMs (ROWS x COLS each) work in
// lock-step on the micro-ops of one instruction controller (inst_ctrl), fed
// from an instruction queue that the host fills. A 32 x 32-bit register file
// holds scalars for constant operations. The CRAMs are linked by the static
// H-tree (htree) for copies, broadcasts, parallel reductions and NoC traffic,
// and by a one-bit ring along which SHIFT moves data from the last bitline of
// CRAM c into the first bitline of CRAM c+1 (the last CRAM wraps to CRAM 0).
// Every CRAM writes H-tree data through its own shuffle unit.
//
// Leaf rules: in normal mode the CRAM whose index equals the controller's
// source index drives its row rd_row into the tree; a word coming down is
// written by CRAM dst (or by every CRAM when all=1) at the tag's row. In level
// mode CRAMs whose index digit at the chosen level equals sc (all lower digits
// 0) drive, and those with digit dc (lower digits 0) write.
//
// NoC: noc_out_* / noc_in_* connect to the local port of the tile's router.
// Instructions: instr_valid/instr_ready push into the queue.
// Follows the paper: tile = instruction queue, controller, RF, CRAMs, H-tree,
// shuffle logic and CRAM shift ring (Fig 4c). Own choices: queue depth, ring
// direction, leaf rules.
module tile
  import pimsab_pkg::*;
#(
  parameter int NCRAM    = 256,
  parameter int ROWS     = 256,
  parameter int COLS     = 256,
  parameter int IQ_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               instr_valid,
  output logic               instr_ready,
  input  instr_t             instr,
  output logic               busy,
  output logic               noc_out_valid,
  input  logic               noc_out_ready,
  output flit_t              noc_out_flit,
  input  logic               noc_in_valid,
  output logic               noc_in_ready,
  input  flit_t              noc_in_flit
);
  localparam int LEVELS = $clog2(NCRAM) / 2;

  // instruction queue
  logic   iq_valid, iq_ready;
  instr_t iq_instr;
  fifo #(.T(instr_t), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr),
    .out_valid(iq_valid), .out_ready(iq_ready), .out_data(iq_instr), .count()
  );

  // controller
  uop_t             uop;
  logic             uop_valid;
  logic [ROW_W-1:0] rd_row;
  logic             lvl_mode, src_valid;
  logic [2:0]       lvl;
  logic [1:0]       sc, dc;
  logic [CIDX_W-1:0] src_idx;
  ht_tag_t          src_tag, root_in_tag, root_out_tag;
  logic [COLS-1:0]  root_in_data, root_out_data;
  shf_e             shf;
  logic [3:0]       shf_log;
  logic             rf_we, rf_par_we;
  logic [4:0]       rf_waddr, rf_raddr;
  logic [31:0]      rf_wdata, rf_rdata;
  logic [RF_N*RF_W-1:0] rf_par_wdata;

  inst_ctrl #(.NCRAM(NCRAM), .COLS(COLS)) u_ctrl (
    .clk, .rst_n, .my_x, .my_y,
    .iq_valid, .iq_ready, .iq_instr, .busy,
    .uop, .uop_valid, .rd_row,
    .ht_lvl_mode(lvl_mode), .ht_lvl(lvl), .ht_sc(sc), .ht_dc(dc),
    .ht_src_idx(src_idx), .ht_src_valid(src_valid), .ht_src_tag(src_tag),
    .root_in_tag, .root_in_data, .root_out_tag, .root_out_data,
    .shf, .shf_log,
    .rf_we, .rf_waddr, .rf_wdata, .rf_par_we, .rf_par_wdata, .rf_raddr, .rf_rdata,
    .noc_out_valid, .noc_out_ready, .noc_out_flit,
    .noc_in_valid, .noc_in_ready, .noc_in_flit
  );

  regfile #(.NREG(RF_N), .W(RF_W)) u_rf (
    .clk, .rst_n, .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata),
    .par_we(rf_par_we), .par_wdata(rf_par_wdata),
    .raddr0(rf_raddr), .rdata0(rf_rdata), .raddr1('0), .rdata1()
  );

  // H-tree
  ht_tag_t [NCRAM-1:0]         leaf_in_tag, leaf_out_tag;
  logic [NCRAM-1:0][COLS-1:0]  leaf_in_data, leaf_out_data;

  htree #(.NCRAM(NCRAM), .WIDTH(COLS)) u_ht (
    .clk, .rst_n, .lvl_mode, .lvl, .sc, .dc, .src_idx,
    .leaf_in_tag, .leaf_in_data, .leaf_out_tag, .leaf_out_data,
    .root_in_tag, .root_in_data, .root_out_tag, .root_out_data
  );

  // CRAMs
  logic [NCRAM-1:0] sh_r, sh_l;   // to_right / to_left of each CRAM

  for (genvar c = 0; c < NCRAM; c++) begin : g_cram
    logic [COLS-1:0] rdata, wdata;
    logic            drive, write, low0;
    logic [1:0]      dig;

    always_comb begin
      low0 = 1'b1;
      for (int l = 0; l < LEVELS; l++) if (l < int'(lvl) && c[2*l +: 2] != 2'd0) low0 = 1'b0;
      dig = 2'(c >> (2*int'(lvl)));
      if (lvl_mode) begin
        drive = src_valid && low0 && dig == sc;
        write = leaf_out_tag[c].valid && low0 && dig == dc;
      end else begin
        drive = src_valid && src_idx == CIDX_W'(c);
        write = leaf_out_tag[c].valid &&
                (leaf_out_tag[c].all || leaf_out_tag[c].dst == CIDX_W'(c));
      end
      leaf_in_tag[c]       = src_tag;
      leaf_in_tag[c].valid = drive;
      leaf_in_data[c]      = drive ? rdata : '0;
    end

    shuffle #(.COLS(COLS)) u_shf (
      .idx(CIDX_W'(c)), .shf, .shf_log, .din(leaf_out_data[c]), .dout(wdata)
    );

    cram #(.ROWS(ROWS), .COLS(COLS)) u_cram (
      .clk, .rst_n, .uop, .uop_valid,
      .mem_we(write), .mem_wr_row(leaf_out_tag[c].row), .mem_wdata(wdata),
      .mem_rd_row(rd_row), .mem_rdata(rdata),
      .sh_from_left(sh_r[(c + NCRAM - 1) % NCRAM]), .sh_from_right(1'b0),
      .sh_to_left(sh_l[c]), .sh_to_right(sh_r[c])
    );
  end
endmodule
