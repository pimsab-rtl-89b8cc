// tb_pimsab_top: end-to-end test of the whole chip on a 2x2 mesh of tiles with
// 4 CRAMs of 64x256 each, two DRAM channels (behavioural models with random
// stalls) on the top row. Each tile gets a short program:
//   tile (0,0): LOAD A and B from DRAM 0 through the transpose unit, MUL
//               8x8 -> 16 bits, STORE the products transposed back to DRAM 0,
//               SIGNAL tile (0,1).
//   tile (1,0): LOAD_RF (parallel register-file load, transpose bypassed),
//               LOAD C, MUL_CONST by a sparse RF constant with the result
//               truncated to 8 bits, STORE to DRAM 1.
//   tile (0,1): WAIT for (0,0), LOAD the products with forwarding to (1,1)
//               (systolic broadcast), double them with a two-slice bit-sliced
//               ADD (cst=0 then cen=1), STORE the 17 result rows untransposed.
//   tile (1,1): RECV the forwarded products, STORE them back transposed.
// The DRAM contents are then compared with integer arithmetic, and the test
// counts how often each mechanism happened (transpose in both directions,
// bypass, parallel RF load, zero-bit skipping, signal, wait stall, forwarding,
// NoC back-pressure, DRAM stalls, bit slicing), failing on any that never did.
// The mechanisms are the architecture's; the mesh is reduced to 2x2 tiles of
// 4 CRAMs with 64 rows, and the program encoding is this design's.
module tb_pimsab_top;
  import pimsab_pkg::*;
  localparam int MX = 2, MY = 2, NC = 4, R = 64, C = 256, NT = MX * MY, E = NC * C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NT-1:0] iv, ir, busy;
  instr_t [NT-1:0] ins;
  logic [MX-1:0] rqv, rqr, rqwe, rsv;
  logic [MX-1:0][31:0] rqa;
  logic [MX-1:0][FLIT_W-1:0] rqd, rsd;

  pimsab_top #(.MESH_X(MX), .MESH_Y(MY), .NCRAM(NC), .ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .instr_valid(iv), .instr_ready(ir), .instr(ins), .busy,
    .dram_req_valid(rqv), .dram_req_ready(rqr), .dram_req_we(rqwe), .dram_req_addr(rqa),
    .dram_req_wdata(rqd), .dram_rsp_valid(rsv), .dram_rsp_data(rsd));

  for (genvar x = 0; x < MX; x++) begin : g_mem
    dram_model #(.W(FLIT_W)) u_mem (.clk, .req_valid(rqv[x]), .req_ready(rqr[x]), .req_we(rqwe[x]),
      .req_addr(rqa[x]), .req_wdata(rqd[x]), .rsp_valid(rsv[x]), .rsp_data(rsd[x]));
  end

  // instruction feeders, one queue per tile
  instr_t prog [NT][$];
  bit go = 0;
  always @(posedge clk) for (int t = 0; t < NT; t++) if (iv[t] && ir[t]) void'(prog[t].pop_front());
  always @(negedge clk)
    for (int t = 0; t < NT; t++) begin
      iv[t]  = go && prog[t].size() > 0;
      ins[t] = (prog[t].size() > 0) ? prog[t][0] : '0;
    end

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_tr_fwd, n_tr_rev, n_bypass, n_rfpar, n_sig, n_wait, n_fwd, n_noc_stall, n_dram_stall, n_uop1;
  bit sig_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_y[0].g_x[0].g_dram.u_dram.u_tr.out_valid && dut.g_y[0].g_x[0].g_dram.u_dram.u_tr.out_ready) begin
      if (dut.g_y[0].g_x[0].g_dram.u_dram.u_tr.dir) n_tr_rev++; else n_tr_fwd++;
    end
    for (int x = 0; x < MX; x++) if (rqv[x] && !rqr[x]) n_dram_stall++;
    if (rsv[1] && !dut.g_y[0].g_x[1].g_dram.u_dram.h.trp) n_bypass++;
    if (dut.g_y[0].g_x[1].u_tile.rf_par_we) n_rfpar++;
    if (dut.g_y[1].g_x[0].u_tile.u_ctrl.sig_in) begin n_sig++; sig_seen = 1; end
    if (busy[2] && !sig_seen && go) n_wait++;
    if (dut.g_y[0].g_x[1].u_tile.uop_valid) n_uop1++;
    for (int t = 0; t < NT; t++)
      for (int p = 0; p < 5; p++)
        if (dut.r_in_valid[t][p] && !dut.r_in_ready[t][p]) n_noc_stall++;
    if (dut.r_in_valid[2][0] && dut.r_in_ready[2][0] && dut.r_in_flit[2][0].head) begin
      hdr_t h; h = hdr_t'(dut.r_in_flit[2][0].data[HDR_W-1:0]);
      if (h.kind == PK_DATA && h.dx == 1 && h.dy == 1) n_fwd++;
    end
  end

  // ---------------- data helpers ----------------
  typedef logic [31:0] vec_t [E];
  function automatic void poke_packed(int col, int addr, int prec, vec_t v);
    logic [FLIT_W-1:0] w [32];
    for (int k = 0; k < prec; k++) w[k] = '0;
    for (int e = 0; e < E; e++)
      for (int b = 0; b < prec; b++) w[(e*prec + b) / FLIT_W][(e*prec + b) % FLIT_W] = v[e][b];
    for (int k = 0; k < prec; k++)
      if (col == 0) g_mem[0].u_mem.poke(addr + k, w[k]); else g_mem[1].u_mem.poke(addr + k, w[k]);
  endfunction
  function automatic logic [FLIT_W-1:0] peek(int col, int addr);
    return (col == 0) ? g_mem[0].u_mem.peek(addr) : g_mem[1].u_mem.peek(addr);
  endfunction
  function automatic void peek_packed(int col, int addr, int prec, output vec_t v);
    for (int e = 0; e < E; e++) begin
      v[e] = 0;
      for (int b = 0; b < prec; b++) v[e][b] = peek(col, addr + (e*prec + b) / FLIT_W)[(e*prec + b) % FLIT_W];
    end
  endfunction
  task automatic cmp(input vec_t g, input vec_t x, input string what);
    int bad; bad = 0;
    for (int e = 0; e < E; e++) if (g[e] != x[e]) bad++;
    checks++;
    if (bad) begin failures++; $display("%s: %0d of %0d elements wrong (e0 %0h vs %0h)", what, bad, E, g[0], x[0]); end
  endtask

  function automatic instr_t i_load(int col, int addr, int nfl, int prec, bit trp, int dst,
                                    bit fwd = 0, int fx = 0, int fy = 0);
    instr_t x; x = '0; x.op = OP_LOAD; x.tx = 4'(col); x.imm = 32'(addr); x.nflits = 8'(nfl);
    x.dprec = PREC_W'(prec); x.trp = trp; x.dst = ROW_W'(dst); x.cram_dst = 0; x.grp = NC;
    x.fwd = fwd; x.fx = 4'(fx); x.fy = 4'(fy); return x;
  endfunction
  function automatic instr_t i_store(int col, int addr, int nfl, int prec, bit trp, int src);
    instr_t x; x = '0; x.op = OP_STORE; x.tx = 4'(col); x.ty = 0; x.imm = 32'(addr); x.nflits = 8'(nfl);
    x.dprec = PREC_W'(prec); x.trp = trp; x.src1 = ROW_W'(src); x.cram_src = 0; x.grp = NC; return x;
  endfunction

  initial begin
    vec_t a, b, c, p, g, ex; instr_t x; logic [FLIT_W-1:0] rfw; logic [31:0] k; int nsl;
    iv = '0; ins = '0;
    for (int e = 0; e < E; e++) begin a[e] = $urandom & 8'hff; b[e] = $urandom & 8'hff; c[e] = $urandom & 8'hff; end
    k = 32'h85;
    poke_packed(0, 0, 8, a); poke_packed(0, 8, 8, b); poke_packed(1, 0, 8, c);
    rfw = '0; for (int r = 0; r < RF_N; r++) rfw[r*32 +: 32] = (r == 2) ? k : 32'(r * 7 + 1);
    g_mem[1].u_mem.poke(100, rfw);

    // tile (0,0)
    prog[0].push_back(i_load(0, 0, 8, 8, 1, 0));
    prog[0].push_back(i_load(0, 8, 8, 8, 1, 8));
    x = '0; x.op = OP_MUL; x.src1 = 0; x.src2 = 8; x.dst = 16; x.prec1 = 8; x.prec2 = 8; x.dprec = 16;
    prog[0].push_back(x);
    prog[0].push_back(i_store(0, 32, 16, 16, 1, 16));
    x = '0; x.op = OP_SIGNAL; x.tx = 0; x.ty = 1; prog[0].push_back(x);
    // tile (1,0)
    x = '0; x.op = OP_LOAD_RF; x.tx = 1; x.imm = 100; x.nflits = 1; prog[1].push_back(x);
    prog[1].push_back(i_load(1, 0, 8, 8, 1, 0));
    x = '0; x.op = OP_MUL_CONST; x.src1 = 0; x.dst = 16; x.prec1 = 8; x.prec2 = 8; x.dprec = 8; x.rf_idx = 2;
    prog[1].push_back(x);
    prog[1].push_back(i_store(1, 32, 8, 8, 1, 16));
    // tile (0,1)
    x = '0; x.op = OP_WAIT; x.tx = 0; x.ty = 0; prog[2].push_back(x);
    prog[2].push_back(i_load(0, 32, 16, 16, 1, 0, 1, 1, 1));
    x = '0; x.op = OP_ADD; x.src1 = 0; x.src2 = 0; x.dst = 20; x.dprec = 8; prog[2].push_back(x);
    x = '0; x.op = OP_ADD; x.src1 = 8; x.src2 = 8; x.dst = 28; x.dprec = 8; x.cen = 1; x.cst = 1;
    prog[2].push_back(x);
    prog[2].push_back(i_store(0, 64, 17, 17, 0, 20));
    // tile (1,1)
    x = '0; x.op = OP_RECV; x.dst = 0; x.cram_dst = 0; x.grp = NC; prog[3].push_back(x);
    prog[3].push_back(i_store(0, 128, 16, 16, 1, 0));

    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk); go = 1;
    // run until every queue is empty and every tile has been idle for a while
    nsl = 0;
    while (nsl < 200) begin
      @(posedge clk);
      if (busy == '0 && prog[0].size() + prog[1].size() + prog[2].size() + prog[3].size() == 0) nsl++;
      else nsl = 0;
    end

    for (int e = 0; e < E; e++) p[e] = a[e] * b[e];
    peek_packed(0, 32, 16, g); cmp(g, p, "tile(0,0) products in DRAM");
    for (int e = 0; e < E; e++) ex[e] = (c[e] * k) & 8'hff;
    peek_packed(1, 32, 8, g); cmp(g, ex, "tile(1,0) const products in DRAM");
    for (int e = 0; e < E; e++) begin
      g[e] = 0;
      for (int r = 0; r < 17; r++) g[e][r] = peek(0, 64 + r)[e];
      ex[e] = 2 * p[e];
    end
    cmp(g, ex, "tile(0,1) bit-sliced add, untransposed store");
    peek_packed(0, 128, 16, g); cmp(g, p, "tile(1,1) forwarded copy");

    // zero-bit skipping: 8 clear cycles + bits 0,2,7 of 0x85 at 8-bit result
    checks++;
    if (n_uop1 != 8 + 8 + 6 + 1) begin failures++; $display("mul_const micro-ops %0d", n_uop1); end

    $display("mechanisms: transpose fwd %0d rev %0d, bypass %0d, rf parallel %0d, signal %0d, wait %0d, forward %0d, noc stall %0d, dram stall %0d, mul_const uops %0d",
             n_tr_fwd, n_tr_rev, n_bypass, n_rfpar, n_sig, n_wait, n_fwd, n_noc_stall, n_dram_stall, n_uop1);
    begin
      int m [10];
      m = '{n_tr_fwd, n_tr_rev, n_bypass, n_rfpar, n_sig, n_wait, n_fwd, n_noc_stall, n_dram_stall, n_uop1};
      foreach (m[i]) begin checks++; if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
