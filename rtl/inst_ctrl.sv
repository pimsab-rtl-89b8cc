// inst_ctrl: the instruction controller of one tile. It takes instructions
// (pimsab_pkg::instr_t) from the instruction queue one at a time and
//   * for compute instructions emits one CRAM micro-op per cycle, broadcast to
//     all CRAMs of the tile (SIMD, lock-step);
//   * for data transfers reads CRAM rows into the H-tree, injects NoC data
//     into it, gathers H-tree words into NoC flits and sends/receives packets;
//   * reads and writes the register file and keeps synchronisation counters.
//
// Micro-op sequences (p = dprec, unsigned arithmetic, one cycle per line):
//   LOGIC     p cycles: dst[k] = tr(src1[k], src2[k]).
//   ADD       [1 carry-clear cycle if a previous ADD left a carry and cen=0]
//             p cycles dst[k] = src1[k]^src2[k]^C, C = carry-out;
//             + 1 cycle writing C to dst[p] if cst (carry cleared). With cst=0
//             the carry stays for a following ADD with cen=1 (bit slicing).
//   MUL       dst (p bits) = src1 (prec1) * src2 (prec2), truncated to p bits
//             (adaptive precision): p cycles clearing dst, then for every bit
//             i < min(prec1,p) of src1: 1 cycle mask <= src1[i],
//             min(prec2, p-i) masked add cycles of src2 into dst[i..], and
//             1 masked cycle writing the carry to dst[i+prec2] when that row
//             is < p.
//   MUL_CONST as MUL with the multiplier taken from RF[rf_idx] (prec2 bits):
//             no mask cycle, and bits of the constant that are 0 cost no
//             cycle at all (bit-level sparsity).
//   ADD_CONST as ADD with src2 replaced by the bits of RF[rf_idx] (prec2 bits,
//             zero above), driven on the port-2 operand of every bitline.
//   SET_MASK  1 cycle: mask = tr(src1, src2).
//   SHIFT     [1 carry-clear cycle] + p cycles; dir 0 writes the value of the
//             next-higher bitline, dir 1 of the next-lower one; across CRAM
//             boundaries only the dir-1 ring exists.
//   RED_CRAM  sum over the bitlines of every CRAM into bitline 0: for
//             s = 0..log2(COLS)-1, copy src1 to src2 shifted down by 2^s
//             bitlines (2^s SHIFTs) and ADD src2 into src1 (dprec bits).
//   RED_TILE  sum over CRAMs into the first CRAM of each group of 4^level
//             (level 0 = the whole tile): per H-tree level, XFER_LVL child
//             1->0 and 3->2, ADD, XFER_LVL 2->0, ADD (src2 is scratch).
//             Both are macros: the controller generates the instructions
//             and runs them as if fetched; the queue waits meanwhile.
// Transfers (WPF = FLIT_W/COLS CRAM words per flit, word w of a transfer maps
// to CRAM cram_x + w mod grp, row base + w div grp):
//   XFER      p rows of CRAM cram_src go up the H-tree, are looped back at the
//             root and broadcast down; CRAM cram_dst (or all, if all=1)
//             writes them through its shuffle logic. p + 2*LEVELS+1 cycles.
//   XFER_LVL  all level-`level` sibling pairs sc -> dc move p rows at once.
//   SEND/STORE nflits*WPF words go up the tree, are packed into flits and
//             sent to tile (tx,ty) / DRAM column tx at address imm.
//   RECV      waits for a data packet (blocking) and writes its words into
//             the CRAMs; with fwd=1 every flit is also sent on to tile
//             (fx,fy) (systolic broadcast).
//   LOAD / LOAD_RF send a read request to DRAM column tx, then receive as
//             RECV / write all RF entries in parallel from each flit.
//   SIGNAL / WAIT one-flit message to a tile / wait for one from (tx,ty).
// Signal packets are accepted at any time; data packets only by a receiving
// instruction, so they stall in the network until then.
//
// Follows the paper: one controller per tile generating micro-ops each cycle,
// constant operations with zero-bit skipping, cen/cst bit slicing, adaptive
// result precision, set_mask, predication choice, shift, CRAM-to-CRAM and
// tile transfers, systolic broadcast, signal/wait. The instruction encoding,
// the micro-op sequences and their cycle counts, transfer word order and
// the packet formats are this design's own.
module inst_ctrl
  import pimsab_pkg::*;
#(
  parameter int NCRAM  = 256,
  parameter int COLS   = 256,
  parameter int OUT_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // instruction queue
  input  logic               iq_valid,
  output logic               iq_ready,
  input  instr_t             iq_instr,
  output logic               busy,
  // CRAMs
  output uop_t               uop,
  output logic               uop_valid,
  output logic [ROW_W-1:0]   rd_row,       // memory-mode read row (all CRAMs)
  // H-tree
  output logic               ht_lvl_mode,
  output logic [2:0]         ht_lvl,
  output logic [1:0]         ht_sc,
  output logic [1:0]         ht_dc,
  output logic [CIDX_W-1:0]  ht_src_idx,
  output logic               ht_src_valid, // a source CRAM drives the tree
  output ht_tag_t            ht_src_tag,   // tag attached by the source
  output ht_tag_t            root_in_tag,
  output logic [COLS-1:0]    root_in_data,
  input  ht_tag_t            root_out_tag,
  input  logic [COLS-1:0]    root_out_data,
  output shf_e               shf,
  output logic [3:0]         shf_log,
  // register file
  output logic               rf_we,
  output logic [4:0]         rf_waddr,
  output logic [31:0]        rf_wdata,
  output logic               rf_par_we,
  output logic [RF_N*RF_W-1:0] rf_par_wdata,
  output logic [4:0]         rf_raddr,
  input  logic [31:0]        rf_rdata,
  // NoC local port
  output logic               noc_out_valid,
  input  logic               noc_out_ready,
  output flit_t              noc_out_flit,
  input  logic               noc_in_valid,
  output logic               noc_in_ready,
  input  flit_t              noc_in_flit
);
  localparam int LEVELS = $clog2(NCRAM) / 2;
  localparam int WPF    = FLIT_W / COLS;
  localparam int WB     = $clog2(WPF) + 1;

  typedef enum logic [4:0] {
    S_FETCH, S_LOGIC, S_ADD_RST, S_ADD, S_ADD_C, S_MZERO, S_MMASK, S_MADD,
    S_MCAR, S_SETMASK, S_SH_RST, S_SHIFT, S_XFER, S_DRAIN, S_SEND_HEAD,
    S_SEND, S_REQ, S_RHEAD, S_RBODY, S_SIG, S_WAIT, S_RFWR
  } state_e;

  state_e      st;
  instr_t      ins;

  // Reduction macros: RED_CRAM / RED_TILE are expanded here into a sequence
  // of SHIFT / XFER_LVL / ADD instructions that are run as if fetched.
  localparam int LCOLS = $clog2(COLS);
  logic        mac;              // a reduction macro is being expanded
  instr_t      mac_ins;          // the macro instruction
  logic [3:0]  ms;               // round (RED_CRAM) or tree level (RED_TILE)
  logic [7:0]  mn;               // step inside the round
  logic        mac_last;         // the generated instruction is the last one
  logic [3:0]  nlev;             // tree levels RED_TILE reduces (level field, 0 = all)
  assign nlev = (mac_ins.level == 3'd0) ? 4'(LEVELS) : 4'(mac_ins.level);
  instr_t      gen;              // generated instruction
  logic        f_valid;          // an instruction is available to fetch
  instr_t      f_ins;

  always_comb begin
    gen = '0;
    gen.src1 = mac_ins.src1; gen.dst = mac_ins.src1; gen.src2 = mac_ins.src2;
    gen.dprec = mac_ins.dprec;
    mac_last = 1'b0;
    if (mac_ins.op == OP_RED_CRAM) begin
      // round s: SHIFT acc -> tmp, 2^s - 1 more SHIFTs of tmp, ADD acc += tmp
      if (mn == (8'd1 << ms)) begin
        gen.op = OP_ADD;
        mac_last = (ms == 4'(LCOLS - 1));
      end else begin
        gen.op = OP_SHIFT; gen.dir = 1'b0; gen.dst = mac_ins.src2;
        gen.src1 = (mn == 0) ? mac_ins.src1 : mac_ins.src2;
      end
    end else begin
      // level l: children 1 -> 0 and 3 -> 2, ADD, child 2 -> 0, ADD
      gen.level = 3'(ms);
      gen.dst   = mac_ins.src2;
      unique case (mn[2:0])
        3'd0:    begin gen.op = OP_XFER_LVL; gen.sc = 2'd1; gen.dc = 2'd0; end
        3'd1:    begin gen.op = OP_XFER_LVL; gen.sc = 2'd3; gen.dc = 2'd2; end
        3'd3:    begin gen.op = OP_XFER_LVL; gen.sc = 2'd2; gen.dc = 2'd0; end
        default: begin gen.op = OP_ADD; gen.dst = mac_ins.src1; end
      endcase
      mac_last = (mn[2:0] == 3'd4) && (ms == nlev - 4'd1);
    end
  end

  assign f_valid = mac || iq_valid;
  assign f_ins   = mac ? gen : iq_instr;
  logic [7:0]  k, i, j;          // step counters
  logic [7:0]  drain;
  logic        carry_dirty;

  // ---------------------------------------------------------------- helpers
  logic [7:0] p, nb, imax;
  logic [31:0] kconst, kmask;
  assign p      = 8'(ins.dprec);
  assign nb     = (ins.op == OP_MUL) ? 8'(ins.prec2) : 8'(ins.prec1);
  assign kconst = rf_rdata;
  assign rf_raddr = ins.rf_idx;
  always_comb begin
    logic [7:0] lim;
    lim   = (ins.op == OP_MUL) ? 8'(ins.prec1) : 8'(ins.prec2);
    imax  = (lim < p) ? lim : p;            // multiplier bits that matter
    kmask = (imax >= 8'd32) ? '1 : ((32'd1 << imax) - 32'd1);
  end

  // first set bit of the constant at or above position 'from'
  function automatic logic [8:0] next_set(logic [31:0] v, logic [7:0] from);
    for (int b = 0; b < 32; b++)
      if (v[b] && 8'(b) >= from) return {1'b0, 8'(b)};
    return 9'h100;
  endfunction

  logic [8:0] nset_i1, nset_0;
  assign nset_0  = next_set(kconst & kmask, 8'd0);
  assign nset_i1 = next_set(kconst & kmask, i + 8'd1);

  logic last_j, trunc;
  assign trunc  = (i + nb) >= p;                 // carry row falls outside dst
  assign last_j = (j == nb - 8'd1) || (i + j == p - 8'd1);

  // ---------------------------------------------------------------- NoC out
  logic   of_in_valid, of_in_ready;
  flit_t  of_in;
  logic [$clog2(OUT_DEPTH):0] of_count;
  fifo #(.T(flit_t), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .in_valid(of_in_valid), .in_ready(of_in_ready), .in_data(of_in),
    .out_valid(noc_out_valid), .out_ready(noc_out_ready), .out_data(noc_out_flit),
    .count(of_count)
  );

  // ------------------------------------------------------------ sync counters
  logic [3:0] sig_cnt [1 << (2*COORD_W)];
  hdr_t in_hdr;
  logic sig_in, sig_dec;
  assign in_hdr = hdr_t'(noc_in_flit.data[HDR_W-1:0]);
  assign sig_in = noc_in_valid && noc_in_flit.head && in_hdr.kind == PK_SIG;

  // ------------------------------------------------------------ send gather
  logic [7:0]  wcol, wrow;          // issue position (group column / row)
  logic [15:0] issued, total_w;     // words issued / to move
  logic [15:0] inflight;            // words in the tree
  logic [WB-1:0] gcnt;              // words gathered into gbuf
  logic [FLIT_W-1:0] gbuf;
  logic [7:0]  fl_sent;
  logic [15:0] fl_words;
  assign total_w  = 16'(ins.nflits) * 16'(WPF);

  // --------------------------------------------------------------- datapath
  hdr_t hdr_o;
  logic can_issue;
  always_comb begin
    uop = '0; uop_valid = 1'b0; rd_row = '0;
    ht_lvl_mode = 1'b0; ht_lvl = ins.level; ht_sc = ins.sc; ht_dc = ins.dc;
    ht_src_idx = '0; ht_src_valid = 1'b0; ht_src_tag = '0;
    root_in_tag = '0; root_in_data = '0;
    shf = ins.shf; shf_log = ins.shf_log;
    rf_we = 1'b0; rf_waddr = ins.rf_idx; rf_wdata = ins.imm;
    rf_par_we = 1'b0; rf_par_wdata = noc_in_flit.data[RF_N*RF_W-1:0];
    of_in_valid = 1'b0; of_in = '0;
    noc_in_ready = sig_in;           // signals are always taken
    iq_ready = 1'b0; sig_dec = 1'b0;
    hdr_o = '0; hdr_o.sx = my_x; hdr_o.sy = my_y;
    hdr_o.addr = ins.imm; hdr_o.nflits = ins.nflits; hdr_o.trp = ins.trp;
    hdr_o.prec = ins.dprec;
    can_issue = (32'(inflight) + 32'(gcnt) + 32'(of_count) * WPF + 1) <= OUT_DEPTH * WPF;

    unique case (st)
      S_FETCH: iq_ready = !mac;
      S_LOGIC: begin
        uop_valid = 1'b1;
        uop.row_a = ins.src1 + k; uop.row_b = ins.src2 + k; uop.tr = ins.tr;
        uop.wps1 = 1'b1; uop.sel1 = WSEL_TR; uop.row_w1 = ins.dst + k; uop.pred = ins.pred;
      end
      S_ADD_RST, S_SH_RST: begin uop_valid = 1'b1; uop.c_rst = 1'b1; end
      S_ADD: begin
        uop_valid = 1'b1;
        uop.row_a = ins.src1 + k; uop.row_b = ins.src2 + k; uop.tr = TR_XOR; uop.c_en = 1'b1;
        if (ins.op == OP_ADD_CONST) begin
          uop.bk_en = 1'b1;
          uop.bk    = (k < 8'(ins.prec2)) && (k < 8'd32) && kconst[k[4:0]];
        end
        uop.wps1 = 1'b1; uop.sel1 = WSEL_S; uop.row_w1 = ins.dst + k; uop.pred = ins.pred;
      end
      S_ADD_C: begin
        uop_valid = 1'b1;
        uop.tr = TR_ZERO; uop.wps1 = 1'b1; uop.sel1 = WSEL_S; uop.row_w1 = ins.dst + p;
        uop.pred = ins.pred; uop.c_rst = 1'b1;
      end
      S_MZERO: begin
        uop_valid = 1'b1;
        uop.tr = TR_ZERO; uop.wps1 = 1'b1; uop.sel1 = WSEL_TR; uop.row_w1 = ins.dst + k;
        uop.c_rst = 1'b1;
      end
      S_MMASK: begin
        uop_valid = 1'b1;
        uop.row_a = ins.src1 + i; uop.tr = TR_A; uop.m_en = 1'b1; uop.c_rst = 1'b1;
      end
      S_MADD: begin
        uop_valid = 1'b1;
        uop.row_a = ins.dst + i + j;
        uop.row_b = (ins.op == OP_MUL) ? ins.src2 + j : ins.src1 + j;
        uop.tr = TR_XOR; uop.c_en = 1'b1;
        uop.c_rst = last_j && trunc;
        uop.wps1 = 1'b1; uop.sel1 = WSEL_S; uop.row_w1 = ins.dst + i + j;
        uop.pred = (ins.op == OP_MUL) ? PRED_MASK : ins.pred;
      end
      S_MCAR: begin
        uop_valid = 1'b1;
        uop.tr = TR_ZERO; uop.wps1 = 1'b1; uop.sel1 = WSEL_S; uop.row_w1 = ins.dst + i + nb;
        uop.pred = (ins.op == OP_MUL) ? PRED_MASK : ins.pred; uop.c_rst = 1'b1;
      end
      S_SETMASK: begin
        uop_valid = 1'b1;
        uop.row_a = ins.src1; uop.row_b = ins.src2; uop.tr = ins.tr; uop.m_en = 1'b1;
      end
      S_SHIFT: begin
        uop_valid = 1'b1;
        uop.row_a = ins.src1 + k; uop.tr = TR_A; uop.pred = ins.pred;
        if (!ins.dir) begin uop.wps1 = 1'b1; uop.sel1 = WSEL_NB; uop.row_w1 = ins.dst + k; end
        else          begin uop.wps2 = 1'b1; uop.sel2 = WSEL_NB; uop.row_w2 = ins.dst + k; end
      end
      S_XFER: begin
        ht_lvl_mode  = (ins.op == OP_XFER_LVL);
        ht_src_idx   = ins.cram_src;
        ht_src_valid = 1'b1;
        rd_row       = ins.src1 + k;
        ht_src_tag   = '{valid: 1'b1, row: ins.dst + k, dst: ins.cram_dst, all: ins.all};
      end
      S_DRAIN: ht_lvl_mode = (ins.op == OP_XFER_LVL);
      S_SEND_HEAD, S_REQ, S_SIG: begin
        hdr_o.dx = ins.tx; hdr_o.dy = ins.ty;
        hdr_o.kind = (st == S_SIG) ? PK_SIG : (st == S_REQ) ? PK_DRD :
                     (ins.op == OP_STORE) ? PK_DWR : PK_DATA;
        hdr_o.to_dram = (st == S_REQ) || (ins.op == OP_STORE);
        if (st == S_SIG) hdr_o.nflits = '0;
        of_in_valid = 1'b1;
        of_in.head = 1'b1;
        of_in.tail = (st != S_SEND_HEAD) || (ins.nflits == 0);
        of_in.data = FLIT_W'(hdr_o);
      end
      S_SEND: begin
        ht_src_idx   = ins.cram_src + wcol;
        ht_src_valid = (issued < total_w) && can_issue;
        rd_row       = ins.src1 + wrow;
        ht_src_tag   = '{valid: 1'b1, row: '0, dst: '0, all: 1'b0};
        of_in_valid  = (gcnt == WB'(WPF));
        of_in.head   = 1'b0;
        of_in.tail   = (fl_sent == ins.nflits - 8'd1);
        of_in.data   = gbuf;
      end
      S_RHEAD: begin
        // wait for the data packet's head flit; forward a new head if asked
        if (noc_in_valid && noc_in_flit.head && in_hdr.kind == PK_DATA &&
            (!ins.fwd || of_in_ready)) begin
          noc_in_ready = 1'b1;
          if (ins.fwd) begin
            hdr_o = in_hdr; hdr_o.dx = ins.fx; hdr_o.dy = ins.fy;
            hdr_o.sx = my_x; hdr_o.sy = my_y;
            of_in_valid = 1'b1;
            of_in.head = 1'b1; of_in.tail = (in_hdr.nflits == 0);
            of_in.data = FLIT_W'(hdr_o);
          end
        end
      end
      S_RBODY: begin
        if (noc_in_valid && !noc_in_flit.head && (!ins.fwd || of_in_ready)) begin
          if (ins.op == OP_LOAD_RF) begin
            rf_par_we = 1'b1;
            noc_in_ready = 1'b1;
          end else begin
            root_in_tag  = '{valid: 1'b1, row: ins.dst + wrow,
                             dst: ins.cram_dst + wcol, all: ins.all};
            root_in_data = noc_in_flit.data[int'(k)*COLS +: COLS];
            noc_in_ready = (k == 8'(WPF - 1));
          end
          if (noc_in_ready && ins.fwd) begin
            of_in_valid = 1'b1; of_in = noc_in_flit;
          end
        end
      end
      S_WAIT: sig_dec = (sig_cnt[{ins.ty, ins.tx}] != 0);
      default: begin end
    endcase
    // CRAM-to-CRAM copies loop the root output straight back down.
    if (st == S_XFER || st == S_DRAIN) begin
      root_in_tag  = root_out_tag;
      root_in_data = root_out_data;
    end
    if (st == S_RFWR) rf_we = 1'b1;
  end

  assign busy = (st != S_FETCH) || iq_valid || mac;

  // -------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_FETCH; ins <= '0; k <= '0; i <= '0; j <= '0; drain <= '0;
      mac <= 1'b0; mac_ins <= '0; ms <= '0; mn <= '0;
      carry_dirty <= 1'b0;
      wcol <= '0; wrow <= '0; issued <= '0; inflight <= '0; gcnt <= '0; gbuf <= '0;
      fl_sent <= '0; fl_words <= '0;
      for (int t = 0; t < (1 << (2*COORD_W)); t++) sig_cnt[t] <= '0;
    end else begin
      // synchronisation counters
      if (sig_in) sig_cnt[{in_hdr.sy, in_hdr.sx}] <= sig_cnt[{in_hdr.sy, in_hdr.sx}] + 4'd1;
      if (sig_dec) sig_cnt[{ins.ty, ins.tx}] <= sig_cnt[{ins.ty, ins.tx}] - 4'd1
                                               + 4'(sig_in && {in_hdr.sy, in_hdr.sx} == {ins.ty, ins.tx});

      unique case (st)
        S_FETCH: if (f_valid) begin
          ins <= f_ins;
          k <= '0; i <= '0; j <= '0;
          wcol <= '0; wrow <= '0; issued <= '0; inflight <= '0; gcnt <= '0;
          fl_sent <= '0; fl_words <= '0;
          unique case (f_ins.op)
            OP_LOGIC:     st <= (f_ins.dprec == 0) ? S_FETCH : S_LOGIC;
            OP_ADD, OP_ADD_CONST: st <= (carry_dirty && !f_ins.cen) ? S_ADD_RST : S_ADD;
            OP_MUL, OP_MUL_CONST: st <= (f_ins.dprec == 0) ? S_FETCH : S_MZERO;
            OP_SET_MASK:  st <= S_SETMASK;
            OP_SHIFT:     st <= carry_dirty ? S_SH_RST : S_SHIFT;
            OP_RF_WR:     st <= S_RFWR;
            OP_XFER, OP_XFER_LVL: st <= (f_ins.dprec == 0) ? S_FETCH : S_XFER;
            OP_SEND, OP_STORE: st <= S_SEND_HEAD;
            OP_RECV:      st <= S_RHEAD;
            OP_LOAD, OP_LOAD_RF: st <= S_REQ;
            OP_SIGNAL:    st <= S_SIG;
            OP_WAIT:      st <= S_WAIT;
            default:      st <= S_FETCH;
          endcase
          // macro expansion: a RED_* from the queue starts it, every
          // generated instruction advances it
          if (mac) begin
            if (mac_last) mac <= 1'b0;
            if (mac_ins.op == OP_RED_CRAM) begin
              if (mn == (8'd1 << ms)) begin mn <= '0; ms <= ms + 1'b1; end
              else mn <= mn + 1'b1;
            end else begin
              if (mn == 8'd4) begin mn <= '0; ms <= ms + 1'b1; end
              else mn <= mn + 1'b1;
            end
          end else if ((f_ins.op == OP_RED_CRAM && LCOLS > 0) || (f_ins.op == OP_RED_TILE && LEVELS > 0)) begin
            mac <= 1'b1; mac_ins <= f_ins; ms <= '0; mn <= '0;
          end
        end
        S_LOGIC: begin k <= k + 1'b1; if (k == p - 1) st <= S_FETCH; end
        S_ADD_RST: begin carry_dirty <= 1'b0; st <= S_ADD; end
        S_ADD: begin
          k <= k + 1'b1;
          if (k == p - 1) begin
            st <= ins.cst ? S_ADD_C : S_FETCH;
            carry_dirty <= !ins.cst;
          end
        end
        S_ADD_C: st <= S_FETCH;
        S_MZERO: begin
          k <= k + 1'b1;
          carry_dirty <= 1'b0;
          if (k == p - 1) begin
            if (ins.op == OP_MUL) st <= (imax == 0) ? S_FETCH : S_MMASK;
            else if (nset_0[8]) st <= S_FETCH;
            else begin i <= nset_0[7:0]; j <= '0; st <= S_MADD; end
          end
        end
        S_MMASK: begin j <= '0; st <= S_MADD; end
        S_MADD: begin
          j <= j + 1'b1;
          if (last_j) begin
            if (!trunc) st <= S_MCAR;
            else if (ins.op == OP_MUL) begin
              i <= i + 1'b1;
              st <= (i + 1 == imax) ? S_FETCH : S_MMASK;
            end else if (nset_i1[8]) st <= S_FETCH;
            else begin i <= nset_i1[7:0]; j <= '0; end
          end
        end
        S_MCAR: begin
          j <= '0;
          if (ins.op == OP_MUL) begin
            i <= i + 1'b1;
            st <= (i + 1 == imax) ? S_FETCH : S_MMASK;
          end else if (nset_i1[8]) st <= S_FETCH;
          else begin i <= nset_i1[7:0]; st <= S_MADD; end
        end
        S_SETMASK: st <= S_FETCH;
        S_SH_RST:  begin carry_dirty <= 1'b0; st <= S_SHIFT; end
        S_SHIFT:   begin k <= k + 1'b1; if (k == p - 1) st <= S_FETCH; end
        S_RFWR:    st <= S_FETCH;
        S_XFER: begin
          k <= k + 1'b1;
          if (k == p - 1) begin
            st <= S_DRAIN;
            drain <= (ins.op == OP_XFER_LVL) ? 8'(2 * int'(ins.level) + 2) : 8'(2 * LEVELS + 1);
          end
        end
        S_DRAIN: begin drain <= drain - 1'b1; if (drain == 1) st <= S_FETCH; end
        S_SEND_HEAD: if (of_in_ready) st <= (ins.nflits == 0) ? S_FETCH : S_SEND;
        S_SEND: begin
          if (ht_src_valid) begin
            issued <= issued + 1'b1;
            if (wcol == 8'(ins.grp) - 8'd1) begin wcol <= '0; wrow <= wrow + 1'b1; end
            else wcol <= wcol + 1'b1;
          end
          inflight <= inflight + 16'(ht_src_valid) - 16'(root_out_tag.valid);
          if (of_in_valid && of_in_ready) begin
            fl_sent <= fl_sent + 1'b1;
            if (fl_sent == ins.nflits - 8'd1) st <= S_FETCH;
          end
          if (root_out_tag.valid) begin
            gbuf[int'(fl_words[WB-2:0])*COLS +: COLS] <= root_out_data;
            fl_words <= (fl_words == 16'(WPF - 1)) ? '0 : fl_words + 1'b1;
          end
          gcnt <= gcnt - ((of_in_valid && of_in_ready) ? WB'(WPF) : '0) + WB'(root_out_tag.valid);
        end
        S_REQ: if (of_in_ready) st <= S_RHEAD;
        S_SIG: if (of_in_ready) st <= S_FETCH;
        S_RHEAD: if (noc_in_ready && !sig_in) begin
          k <= '0; fl_sent <= '0;
          st <= (in_hdr.nflits == 0) ? S_FETCH : S_RBODY;
        end
        S_RBODY: if (noc_in_valid && !noc_in_flit.head && (!ins.fwd || of_in_ready)) begin
          if (ins.op != OP_LOAD_RF) begin
            k <= (k == 8'(WPF - 1)) ? '0 : k + 1'b1;
            if (wcol == 8'(ins.grp) - 8'd1) begin wcol <= '0; wrow <= wrow + 1'b1; end
            else wcol <= wcol + 1'b1;
          end
          if (noc_in_ready) begin
            fl_sent <= fl_sent + 1'b1;
            if (noc_in_flit.tail) begin
              st <= (ins.op == OP_LOAD_RF) ? S_FETCH : S_DRAIN;
              drain <= 8'(LEVELS + 1);
            end
          end
        end
        S_WAIT: if (sig_dec) st <= S_FETCH;
        default: st <= S_FETCH;
      endcase
    end
  end
endmodule
