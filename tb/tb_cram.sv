// tb_cram: fills a 16x16 CRAM in memory mode, runs random micro-ops and
// checks every row against a model of the array and its PE row after each
// cycle; also checks the shift links and a bit-serial 4-bit addition done
// with micro-ops (n+1 = 5 cycles).
// The n+1-cycle add is the architecture's figure; the array size is reduced
// for speed and the micro-op fields are this design's.
module tb_cram;
  import pimsab_pkg::*;
  localparam int R = 16, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  uop_t u; logic uv, mwe; logic [ROW_W-1:0] wr, rr; logic [C-1:0] wdat, rdat;
  logic fl, fr, tl, trt;
  cram #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .uop(u), .uop_valid(uv), .mem_we(mwe),
    .mem_wr_row(wr), .mem_wdata(wdat), .mem_rd_row(rr), .mem_rdata(rdat),
    .sh_from_left(fl), .sh_from_right(fr), .sh_to_left(tl), .sh_to_right(trt));

  logic [C-1:0] m [R];
  logic [C-1:0] mc, mm;

  task automatic check_all(string what);
    for (int r = 0; r < R; r++) begin
      rr = ROW_W'(r); #1;
      checks++;
      if (rdat !== m[r]) begin failures++; $display("%s: row %0d %h != %h", what, r, rdat, m[r]); end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    u = '0; uv = 0; mwe = 0; wr = 0; rr = 0; wdat = 0; fl = 0; fr = 0; mc = 0; mm = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // memory mode
    for (int r = 0; r < R; r++) begin
      @(negedge clk); mwe = 1; wr = ROW_W'(r); wdat = C'($urandom);
      @(posedge clk); m[r] = wdat;
    end
    @(negedge clk); mwe = 0;
    check_all("memory mode");
    // random micro-ops
    for (int it = 0; it < 400; it++) begin
      logic [C-1:0] a, b, t, s, p, x1, x2, nr, nl;
      @(negedge clk);
      u = uop_t'({$urandom, $urandom, $urandom});
      u.row_a = ROW_W'($urandom % R); u.row_b = ROW_W'($urandom % R);
      u.row_w1 = ROW_W'($urandom % R); u.row_w2 = ROW_W'($urandom % R);
      u.c_rst = ($urandom % 6) == 0; u.m_rst = ($urandom % 6) == 0;
      uv = 1; fl = 1'($urandom); fr = 1'($urandom);
      a = m[u.row_a]; b = u.bk_en ? {C{u.bk}} : m[u.row_b];
      for (int i = 0; i < C; i++) begin t[i] = u.tr[{a[i], b[i]}]; s[i] = t[i] ^ mc[i]; end
      for (int i = 0; i < C; i++) begin
        nr[i] = (i == C-1) ? fr : s[i+1]; nl[i] = (i == 0) ? fl : s[i-1];
      end
      case (u.pred) PRED_NONE: p = '1; PRED_MASK: p = mm; PRED_CARRY: p = mc; default: p = ~mm; endcase
      case (u.sel1) WSEL_S: x1 = s; WSEL_DIN: x1 = wdat; WSEL_NB: x1 = nr; default: x1 = t; endcase
      case (u.sel2) WSEL_S: x2 = s; WSEL_DIN: x2 = wdat; WSEL_NB: x2 = nl; default: x2 = t; endcase
      #1; checks++;
      if (tl !== s[0] || trt !== s[C-1]) begin failures++; $display("shift link mismatch"); end
      @(posedge clk);
      if (u.wps1) m[u.row_w1] = (m[u.row_w1] & ~p) | (x1 & p);
      if (u.wps2) m[u.row_w2] = (m[u.row_w2] & ~p) | (x2 & p);
      for (int i = 0; i < C; i++) begin
        if (u.c_rst) mc[i] = 0; else if (u.c_en) mc[i] = (a[i]&b[i])|(a[i]&mc[i])|(b[i]&mc[i]);
        if (u.m_rst) mm[i] = 0; else if (u.m_en) mm[i] = t[i];
      end
      @(negedge clk); uv = 0;
      check_all("uop");
    end
    // bit-serial add: rows 0..3 + rows 4..7 -> rows 8..12 (n+1 cycles)
    begin
      logic [4:0] va [C]; logic [3:0] x [C], y [C]; int cyc;
      for (int i = 0; i < C; i++) begin x[i] = 4'($urandom); y[i] = 4'($urandom); va[i] = x[i] + y[i]; end
      for (int r = 0; r < 4; r++) begin
        @(negedge clk); mwe = 1; wr = ROW_W'(r);
        for (int i = 0; i < C; i++) wdat[i] = x[i][r];
        @(negedge clk); wr = ROW_W'(r + 4);
        for (int i = 0; i < C; i++) wdat[i] = y[i][r];
      end
      @(negedge clk); mwe = 0; u = '0; uv = 1; u.c_rst = 1;   // clear carry
      cyc = 0;
      for (int k = 0; k <= 4; k++) begin
        @(negedge clk);
        u = '0; uv = 1; u.row_a = ROW_W'(k); u.row_b = ROW_W'(k + 4); u.row_w1 = ROW_W'(k + 8);
        u.wps1 = 1; u.sel1 = WSEL_S; u.pred = PRED_NONE;
        if (k < 4) begin u.tr = TR_XOR; u.c_en = 1; end
        else begin u.tr = TR_ZERO; u.c_rst = 1; end
        cyc++;
      end
      @(negedge clk); uv = 0;
      checks++; if (cyc != 5) failures++;
      for (int k = 0; k <= 4; k++) begin
        rr = ROW_W'(k + 8); #1;
        for (int i = 0; i < C; i++) begin
          checks++;
          if (rdat[i] !== va[i][k]) begin failures++; $display("add lane %0d bit %0d", i, k); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
