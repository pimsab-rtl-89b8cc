// tb_wl_fir: the FIR filter workload on one tile (16 CRAMs of 64x256, i.e.
// a 4096-element vector), the testbench playing the NoC. y[n] =
// sum_t h[t] * x[n-t] in 16-bit arithmetic, with 8 taps held in the register
// file: for each tap the input is shifted one bitline along the whole tile
// (crossing CRAM boundaries through the shift ring, wrapping at the end), multiplied by the
// tap with MUL_CONST (zero bits skipped) and accumulated with ADD. Every
// output lane is compared with the same sum computed in the testbench. The
// published benchmark uses 7,833,600 int16 inputs and 32 taps; this is the
// same computation on one tile with 8 taps.
module tb_wl_fir;
  localparam int RROWS = 64;
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
    vec_t xs [NC]; vec_t g; logic [15:0] h [8]; instr_t x; int cur, nxt, bad;
    logic [15:0] xv [NC*C]; logic [15:0] y;
    iv = 0; ins = '0; nor_ = 1; niv = 0; nif = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < NC*C; n++) xv[n] = 16'($urandom);
    for (int t = 0; t < 8; t++) h[t] = 16'($urandom) & 16'($urandom);
    for (int c = 0; c < NC; c++) begin
      for (int b = 0; b < C; b++) xs[c][b] = 32'(xv[c*C + b]);
      load_vec(c, 0, 16, xs[c]);
    end
    for (int t = 0; t < 8; t++) begin
      x = '0; x.op = OP_RF_WR; x.rf_idx = 5'(t); x.imm = 32'(h[t]); push(x);
    end
    // acc (rows 16..31) = x * h[0]
    x = '0; x.op = OP_MUL_CONST; x.src1 = 0; x.dst = 16; x.prec1 = 16; x.prec2 = 16; x.dprec = 16; x.rf_idx = 0;
    push(x);
    cur = 0; nxt = 48;
    for (int t = 1; t < 8; t++) begin
      x = '0; x.op = OP_SHIFT; x.src1 = ROW_W'(cur); x.dst = ROW_W'(nxt); x.dprec = 16; x.dir = 1; push(x);
      x = '0; x.op = OP_MUL_CONST; x.src1 = ROW_W'(nxt); x.dst = 32; x.prec1 = 16; x.prec2 = 16; x.dprec = 16;
      x.rf_idx = 5'(t); push(x);
      x = '0; x.op = OP_ADD; x.src1 = 16; x.src2 = 32; x.dst = 16; x.dprec = 16; push(x);
      {cur, nxt} = {nxt, cur};
    end
    wait_idle();
    for (int c = 0; c < NC; c++) begin
      read_vec(c, 16, 16, g);
      bad = 0;
      for (int b = 0; b < C; b++) begin
        y = '0;
        for (int t = 0; t < 8; t++) y += h[t] * xv[(c*C + b - t + NC*C) % (NC*C)];
        if (g[b][15:0] != y) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("fir CRAM %0d: %0d lanes wrong", c, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
