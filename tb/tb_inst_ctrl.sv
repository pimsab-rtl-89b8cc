// tb_inst_ctrl: the controller alone, with a register-file model. Checks the
// number of micro-op cycles of each compute instruction against closed-form
// counts (ADD p+cst, carry-clear cycle when needed, MUL with truncated
// result precision, MUL_CONST skipping zero bits of the constant, LOGIC,
// SHIFT, SET_MASK), the first micro-op's fields, the RF write port, and that a
// SIGNAL leaves as a one-flit packet to the right tile while WAIT blocks until
// a signal from the named tile arrives.
// The add cycle count (n+1 with carry store) is the architecture's; the
// other counts are those of this design's micro-op sequences.
module tb_inst_ctrl;
  import pimsab_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iqv, iqr, busy; instr_t iqi;
  uop_t uop; logic uv; logic [ROW_W-1:0] rd_row;
  logic lm, sv; logic [2:0] lvl; logic [1:0] sc, dc; logic [CIDX_W-1:0] si;
  ht_tag_t st, rit, rot; logic [255:0] rid, rod; shf_e shf; logic [3:0] shl;
  logic rwe, rpwe; logic [4:0] rwa, rra; logic [31:0] rwd, rrd; logic [1023:0] rpwd;
  logic nov, nor_, niv, nir; flit_t nof, nif;
  logic [31:0] rf [32];

  inst_ctrl #(.NCRAM(16), .COLS(256)) dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd2),
    .iq_valid(iqv), .iq_ready(iqr), .iq_instr(iqi), .busy,
    .uop, .uop_valid(uv), .rd_row,
    .ht_lvl_mode(lm), .ht_lvl(lvl), .ht_sc(sc), .ht_dc(dc), .ht_src_idx(si), .ht_src_valid(sv),
    .ht_src_tag(st), .root_in_tag(rit), .root_in_data(rid), .root_out_tag(rot), .root_out_data(rod),
    .shf, .shf_log(shl),
    .rf_we(rwe), .rf_waddr(rwa), .rf_wdata(rwd), .rf_par_we(rpwe), .rf_par_wdata(rpwd),
    .rf_raddr(rra), .rf_rdata(rrd),
    .noc_out_valid(nov), .noc_out_ready(nor_), .noc_out_flit(nof),
    .noc_in_valid(niv), .noc_in_ready(nir), .noc_in_flit(nif));

  assign rrd = rf[rra];
  always @(posedge clk) if (rwe) rf[rwa] <= rwd;

  int uops; uop_t first; bit got_first;
  always @(posedge clk) if (uv) begin
    if (!got_first) begin first = uop; got_first = 1; end
    uops++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input instr_t x);
    @(negedge clk); iqv = 1; iqi = x; uops = 0; got_first = 0;
    @(posedge clk); #1; iqv = 0;
    while (busy) @(posedge clk);
    #1;
  endtask

  task automatic expect_uops(input int n, input string what);
    checks++;
    if (uops != n) begin failures++; $display("%s: %0d micro-ops, expected %0d", what, uops, n); end
  endtask

  function automatic int min(int a, int b); return a < b ? a : b; endfunction

  initial begin
    instr_t x;
    iqv = 0; iqi = '0; rod = '0; rot = '0; nor_ = 1; niv = 0; nif = '0;
    for (int i = 0; i < 32; i++) rf[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // ADD with carry store: p+1
    x = '0; x.op = OP_ADD; x.dprec = 8; x.cst = 1; x.src1 = 10; x.src2 = 20; x.dst = 30;
    issue(x); expect_uops(9, "add cst");
    checks++;
    if (first.row_a != 10 || first.row_b != 20 || first.row_w1 != 30 || first.tr != TR_XOR ||
        !first.c_en || !first.wps1 || first.sel1 != WSEL_S) begin failures++; $display("add uop fields"); end
    // bit slicing: low half without cst, high half with cen: 4 + 5, no clear cycle
    x.dprec = 4; x.cst = 0; x.cen = 0; issue(x); expect_uops(4, "add low slice");
    x.cst = 1; x.cen = 1; issue(x); expect_uops(5, "add high slice (cen)");
    // carry left dirty, then a plain add needs one clear cycle
    x.cst = 0; x.cen = 0; issue(x); expect_uops(4, "add no cst");
    x.cst = 1; issue(x); expect_uops(6, "add after dirty carry");
    // LOGIC / SET_MASK / SHIFT
    x = '0; x.op = OP_LOGIC; x.dprec = 7; x.tr = TR_AND; issue(x); expect_uops(7, "logic");
    x = '0; x.op = OP_SET_MASK; x.tr = TR_A; issue(x); expect_uops(1, "set_mask");
    x = '0; x.op = OP_SHIFT; x.dprec = 5; issue(x); expect_uops(5, "shift");
    // MUL with several precisions (adaptive result precision)
    for (int t = 0; t < 6; t++) begin
      int na, nb, pd, e;
      na = 1 + $urandom % 8; nb = 1 + $urandom % 8; pd = 1 + $urandom % (na + nb);
      x = '0; x.op = OP_MUL; x.prec1 = PREC_W'(na); x.prec2 = PREC_W'(nb); x.dprec = PREC_W'(pd);
      issue(x);
      e = pd;
      for (int i = 0; i < min(na, pd); i++) e += 1 + min(nb, pd - i) + ((i + nb < pd) ? 1 : 0);
      expect_uops(e, "mul");
    end
    // MUL_CONST: zero bits of the constant are skipped
    for (int t = 0; t < 6; t++) begin
      int na, nc, pd, e; logic [31:0] k;
      na = 1 + $urandom % 8; nc = 1 + $urandom % 8; pd = 1 + $urandom % (na + nc);
      k = $urandom & ((32'd1 << nc) - 1);
      x = '0; x.op = OP_RF_WR; x.rf_idx = 5'(t + 1); x.imm = k; issue(x);
      checks++; if (rf[t + 1] !== k) begin failures++; $display("rf write"); end
      x = '0; x.op = OP_MUL_CONST; x.prec1 = PREC_W'(na); x.prec2 = PREC_W'(nc); x.dprec = PREC_W'(pd);
      x.rf_idx = 5'(t + 1);
      issue(x);
      e = pd;
      for (int i = 0; i < min(nc, pd); i++)
        if (k[i]) e += min(na, pd - i) + ((i + na < pd) ? 1 : 0);
      expect_uops(e, "mul_const");
    end
    // SIGNAL: one head+tail flit to tile (3,1)
    begin
      bit seen; seen = 0;
      fork
        begin x = '0; x.op = OP_SIGNAL; x.tx = 3; x.ty = 1; issue(x); repeat (3) @(posedge clk); end
        begin
          repeat (10) begin
            @(posedge clk);
            if (nov && nor_) begin
              hdr_t h; h = hdr_t'(nof.data[HDR_W-1:0]);
              seen = 1; checks++;
              if (!nof.head || !nof.tail || h.kind != PK_SIG || h.dx != 3 || h.dy != 1 || h.sx != 1 || h.sy != 2) begin
                failures++; $display("signal flit"); end
            end
          end
        end
      join
      checks++; if (!seen) begin failures++; $display("no signal sent"); end
    end
    // WAIT blocks until a signal from (0,2) arrives
    @(negedge clk); x = '0; x.op = OP_WAIT; x.tx = 0; x.ty = 2; iqv = 1; iqi = x;
    @(posedge clk); #1; iqv = 0;
    repeat (20) @(posedge clk);
    checks++; if (!busy) begin failures++; $display("wait did not block"); end
    @(negedge clk);
    begin hdr_t h; h = '0; h.kind = PK_SIG; h.sx = 0; h.sy = 2; h.dx = 1; h.dy = 2;
      niv = 1; nif.head = 1; nif.tail = 1; nif.data = FLIT_W'(h); end
    @(posedge clk); #1; niv = 0;
    repeat (3) @(posedge clk);
    checks++; if (busy) begin failures++; $display("wait did not finish"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
