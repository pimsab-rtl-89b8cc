// tb_tile: one tile with 16 CRAMs of 64x256, the testbench playing the NoC.
// Vectors are loaded with RECV (data packets from the testbench), computed
// on with ADD, MUL (truncated precision), MUL_CONST, LOGIC, SET_MASK with a
// predicated op, SHIFT across a CRAM boundary, XFER (point-to-point and
// broadcast with shuffle), XFER_LVL (parallel sibling transfer), and read
// back with SEND. ADD_CONST adds a register-file constant. Results are
// compared with integer arithmetic on the testbench's own copy of the
// vectors. RECV with forwarding must re-send every flit to the forward tile.
// Sizes are reduced (16 CRAMs of 64 rows); the instruction encoding is this
// design's.
module tb_tile;
  import pimsab_pkg::*;
  localparam int NC = 16, R = 64, C = 256, WPF = FLIT_W / C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, busy, nov, nor_, niv, nir; instr_t ins; flit_t nof, nif;
  tile #(.NCRAM(NC), .ROWS(R), .COLS(C)) dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd1),
    .instr_valid(iv), .instr_ready(ir), .instr(ins), .busy,
    .noc_out_valid(nov), .noc_out_ready(nor_), .noc_out_flit(nof),
    .noc_in_valid(niv), .noc_in_ready(nir), .noc_in_flit(nif));

  flit_t outq [$];
  always @(posedge clk) if (nov && nor_) outq.push_back(nof);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic push(input instr_t x);
    @(negedge clk); iv = 1; ins = x; #1;
    while (!ir) begin @(negedge clk); #1; end
    @(posedge clk); #1; iv = 0;
  endtask
  task automatic wait_idle();
    @(posedge clk); #1; while (busy) begin @(posedge clk); #1; end
  endtask
  task automatic send_flit(input flit_t f);
    @(negedge clk); niv = 1; nif = f; #1;
    while (!nir) begin @(negedge clk); #1; end
    @(posedge clk); #1; niv = 0;
  endtask

  typedef logic [31:0] vec_t [C];

  // write prec-bit elements v into CRAM c rows r.. (transposed), via RECV
  task automatic load_vec(input int c, input int r, input int prec, input vec_t v, input bit fwd = 0);
    instr_t x; hdr_t h; flit_t f; int nfl;
    nfl = (prec + WPF - 1) / WPF;
    x = '0; x.op = OP_RECV; x.dst = ROW_W'(r); x.cram_dst = CIDX_W'(c); x.grp = 1;
    x.fwd = fwd; x.fx = 4'd2; x.fy = 4'd0;
    push(x);
    h = '0; h.kind = PK_DATA; h.dx = 1; h.dy = 1; h.nflits = 8'(nfl);
    f.head = 1; f.tail = 0; f.data = FLIT_W'(h); send_flit(f);
    for (int n = 0; n < nfl; n++) begin
      f.head = 0; f.tail = (n == nfl - 1); f.data = '0;
      for (int w = 0; w < WPF; w++)
        for (int b = 0; b < C; b++)
          f.data[w*C + b] = (n*WPF + w < prec) ? v[b][n*WPF + w] : 1'b0;
      send_flit(f);
    end
    wait_idle();
  endtask

  // read prec rows of CRAM c starting at r back through SEND
  task automatic read_vec(input int c, input int r, input int prec, output vec_t v);
    instr_t x; int nfl; hdr_t hq;
    nfl = (prec + WPF - 1) / WPF;
    outq.delete();
    x = '0; x.op = OP_SEND; x.src1 = ROW_W'(r); x.cram_src = CIDX_W'(c); x.grp = 1;
    x.tx = 4'd0; x.ty = 4'd3; x.nflits = 8'(nfl);
    push(x); wait_idle(); repeat (3) @(posedge clk);
    checks++;
    hq = hdr_t'(outq.size() > 0 ? outq[0].data[HDR_W-1:0] : '0);
    if (outq.size() != nfl + 1 || !outq[0].head || !outq[nfl].tail || hq.dy != 3) begin
      failures++; $display("SEND packet shape wrong (%0d flits)", outq.size()); end
    for (int b = 0; b < C; b++) v[b] = 0;
    for (int n = 0; n < nfl && n + 1 < outq.size(); n++)
      for (int w = 0; w < WPF; w++)
        for (int b = 0; b < C; b++)
          if (n*WPF + w < prec) v[b][n*WPF + w] = outq[n + 1].data[w*C + b];
  endtask

  task automatic compare(input vec_t got, input vec_t exp, input int prec, input string what);
    int bad; bad = 0;
    for (int b = 0; b < C; b++)
      if ((got[b] & ((64'd1 << prec) - 1)) != (exp[b] & ((64'd1 << prec) - 1))) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d lanes wrong (lane0 %0d vs %0d)", what, bad, got[0], exp[0]); end
  endtask

  initial begin
    vec_t a, b, e, g, a3; instr_t x; logic [31:0] k; hdr_t fh;
    iv = 0; ins = '0; nor_ = 1; niv = 0; nif = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < C; i++) begin a[i] = $urandom & 8'hff; b[i] = $urandom & 8'hff; a3[i] = $urandom & 8'hff; end
    load_vec(2, 0, 8, a);
    load_vec(2, 8, 8, b);
    read_vec(2, 0, 8, g); compare(g, a, 8, "load/store round trip");

    // ADD 8-bit with carry store -> 9 bits at row 16
    x = '0; x.op = OP_ADD; x.src1 = 0; x.src2 = 8; x.dst = 16; x.dprec = 8; x.cst = 1; push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = a[i] + b[i];
    read_vec(2, 16, 9, g); compare(g, e, 9, "add");

    // MUL 8x8 with a 12-bit result (adaptive precision) at row 32
    x = '0; x.op = OP_MUL; x.src1 = 0; x.src2 = 8; x.dst = 32; x.prec1 = 8; x.prec2 = 8; x.dprec = 12;
    push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = (a[i] * b[i]) & 12'hfff;
    read_vec(2, 32, 12, g); compare(g, e, 12, "mul");

    // MUL_CONST with a sparse constant from the RF, 16-bit result at row 32
    k = 32'h85;
    x = '0; x.op = OP_RF_WR; x.rf_idx = 3; x.imm = k; push(x);
    x = '0; x.op = OP_MUL_CONST; x.src1 = 0; x.dst = 32; x.prec1 = 8; x.prec2 = 8; x.dprec = 16; x.rf_idx = 3;
    push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = a[i] * k;
    read_vec(2, 32, 16, g); compare(g, e, 16, "mul_const");

    // ADD_CONST: a + RF[3], 9-bit result at row 48 (constant on the port-2 path)
    x = '0; x.op = OP_ADD_CONST; x.src1 = 0; x.dst = 48; x.dprec = 8; x.prec2 = 8; x.cst = 1; x.rf_idx = 3;
    push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = a[i] + k;
    read_vec(2, 48, 9, g); compare(g, e, 9, "add_const");

    // LOGIC AND at row 48
    x = '0; x.op = OP_LOGIC; x.src1 = 0; x.src2 = 8; x.dst = 48; x.dprec = 8; x.tr = TR_AND; push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = a[i] & b[i];
    read_vec(2, 48, 8, g); compare(g, e, 8, "logic and");

    // SET_MASK from bit 0 of a, then a masked copy of b over rows 48..
    x = '0; x.op = OP_SET_MASK; x.src1 = 0; x.tr = TR_A; push(x);
    x = '0; x.op = OP_LOGIC; x.src1 = 8; x.src2 = 8; x.dst = 48; x.dprec = 8; x.tr = TR_A; x.pred = PRED_MASK;
    push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = a[i][0] ? b[i] : (a[i] & b[i]);
    read_vec(2, 48, 8, g); compare(g, e, 8, "predicated copy");

    // SHIFT toward higher bitlines across the CRAM 2 -> CRAM 3 boundary
    load_vec(3, 0, 8, a3);
    x = '0; x.op = OP_SHIFT; x.src1 = 0; x.dst = 56; x.dprec = 8; x.dir = 1; push(x); wait_idle();
    for (int i = 0; i < C; i++) e[i] = (i == 0) ? a[C-1] : a3[i-1];
    read_vec(3, 56, 8, g); compare(g, e, 8, "shift across CRAMs");

    // XFER CRAM 2 rows 0..7 -> CRAM 9 rows 20..27
    x = '0; x.op = OP_XFER; x.cram_src = 2; x.src1 = 0; x.cram_dst = 9; x.dst = 20; x.dprec = 8;
    push(x); wait_idle();
    read_vec(9, 20, 8, g); compare(g, a, 8, "xfer");

    // broadcast row 0 of CRAM 2 to all CRAMs (row 60) with SHF_DUP, factor 256
    x = '0; x.op = OP_XFER; x.cram_src = 2; x.src1 = 0; x.all = 1; x.dst = 60; x.dprec = 1;
    x.shf = SHF_DUP; x.shf_log = 8; push(x); wait_idle();
    for (int c = 0; c < NC; c++) begin
      read_vec(c, 60, 1, g);
      for (int i = 0; i < C; i++) e[i] = a[c][0];
      compare(g, e, 1, "broadcast+shuffle");
    end

    // XFER_LVL level 1: child 2 -> child 0 of the root (CRAM 8 -> CRAM 0)
    load_vec(8, 40, 8, b);
    x = '0; x.op = OP_XFER_LVL; x.level = 1; x.sc = 2; x.dc = 0; x.src1 = 40; x.dst = 40; x.dprec = 8;
    push(x); wait_idle();
    read_vec(0, 40, 8, g); compare(g, b, 8, "xfer_lvl");

    // RECV with forwarding: every flit re-sent to tile (2,0)
    outq.delete();
    load_vec(6, 0, 8, a, 1);
    repeat (5) @(posedge clk);
    checks++;
    fh = hdr_t'(outq.size() > 0 ? outq[0].data[HDR_W-1:0] : '0);
    if (outq.size() != 3 || fh.dx != 2 || fh.dy != 0) begin
      failures++; $display("forwarded %0d flits", outq.size()); end
    read_vec(6, 0, 8, g); compare(g, a, 8, "recv with forward");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
