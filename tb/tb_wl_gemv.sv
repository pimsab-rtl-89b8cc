// tb_wl_gemv: the matrix-vector workload on one tile (16 CRAMs of 128x256).
// A 4 x 1024 int8 matrix is spread over the tile, one row per group of 4
// CRAMs, one element per bitline; the int8 vector is loaded into every group
// (as a DRAM broadcast would). After an 8x8 -> 28-bit MUL, each row is
// reduced to one number in two stages: inside each CRAM with RED_CRAM
// (log2(256) = 8 rounds of "shift by 2^s bitlines, ADD", shifts staying
// inside the CRAM), then across the 4 CRAMs of a group with RED_TILE over one
// H-tree level (sibling transfers and ADDs as a two-step tree). The products
// and every CRAM's partial sum are checked on the way; finally, on freshly
// computed products, RED_CRAM and RED_TILE over all levels must leave the
// sum of all four rows in CRAM 0. The result for row g must appear in bitline 0 of
// CRAM 4g and equal the dot product computed in the testbench. The
// published benchmark is m=61440, k=2048 with int32 accumulation; this is
// the same dataflow at m=4, k=1024 with a 28-bit accumulator.
module tb_wl_gemv;
  localparam int RROWS = 128;
  import pimsab_pkg::*;
  localparam int NC = 16, R = RROWS, C = 256, WPF = FLIT_W / C;
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
    vec_t mv, vv, g; instr_t x; logic [7:0] m [4][1024]; logic [7:0] v [1024]; logic [31:0] y;
    iv = 0; ins = '0; nor_ = 1; niv = 0; nif = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 1024; j++) v[j] = 8'($urandom);
    for (int r = 0; r < 4; r++) for (int j = 0; j < 1024; j++) m[r][j] = 8'($urandom);
    for (int c = 0; c < NC; c++) begin
      for (int b = 0; b < C; b++) begin mv[b] = 32'(m[c/4][(c%4)*C + b]); vv[b] = 32'(v[(c%4)*C + b]); end
      load_vec(c, 0, 8, mv);
      load_vec(c, 8, 8, vv);
    end
    // products, 28-bit, rows 16..43
    x = '0; x.op = OP_MUL; x.src1 = 0; x.src2 = 8; x.dst = 16; x.prec1 = 8; x.prec2 = 8; x.dprec = 28; push(x);
    wait_idle();
    read_vec(5, 16, 28, g);
    for (int b = 0; b < C; b++) begin
      y = 32'(m[1][C + b]) * 32'(v[C + b]);
      checks++; if (g[b][27:0] != y[27:0]) begin failures++; $display("product lane %0d: %0d vs %0d", b, g[b], y); end
    end
    // in-CRAM reduction (RED_CRAM, expanded by the controller into shift/add rounds)
    x = '0; x.op = OP_RED_CRAM; x.src1 = 16; x.src2 = 48; x.dprec = 28; push(x);
    wait_idle();
    for (int c = 0; c < NC; c++) begin
      y = 0;
      for (int b = 0; b < C; b++) y += 32'(m[c/4][(c%4)*C + b]) * 32'(v[(c%4)*C + b]);
      read_vec(c, 16, 28, g);
      checks++; if (g[0][27:0] != y[27:0]) begin failures++; $display("CRAM %0d partial sum %0d vs %0d", c, g[0], y); end
    end
    // across the 4 CRAMs of each group: RED_TILE over one tree level
    x = '0; x.op = OP_RED_TILE; x.level = 1; x.src1 = 16; x.src2 = 48; x.dprec = 28; push(x);
    wait_idle();
    for (int r = 0; r < 4; r++) begin
      y = 0;
      for (int j = 0; j < 1024; j++) y += 32'(m[r][j]) * 32'(v[j]);
      read_vec(4*r, 16, 28, g);
      checks++;
      if (g[0][27:0] != y[27:0]) begin failures++; $display("gemv row %0d: %0d, expected %0d", r, g[0], y); end
    end
    // the whole tile: recompute the products, then RED_CRAM and RED_TILE over
    // all levels sum all four rows into CRAM 0
    x = '0; x.op = OP_MUL; x.src1 = 0; x.src2 = 8; x.dst = 16; x.prec1 = 8; x.prec2 = 8; x.dprec = 28; push(x);
    x = '0; x.op = OP_RED_CRAM; x.src1 = 16; x.src2 = 48; x.dprec = 28; push(x);
    x = '0; x.op = OP_RED_TILE; x.level = 0; x.src1 = 16; x.src2 = 48; x.dprec = 28; push(x);
    wait_idle();
    y = 0;
    for (int r = 0; r < 4; r++) for (int j = 0; j < 1024; j++) y += 32'(m[r][j]) * 32'(v[j]);
    read_vec(0, 16, 28, g);
    checks++;
    if (g[0][27:0] != y[27:0]) begin failures++; $display("tile sum %0d, expected %0d", g[0], y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
