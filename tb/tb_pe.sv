// tb_pe: random micro-ops on an 8-lane PE row, compared each cycle with a
// per-lane reference model of the TR mux, XOR sum, carry/mask latches,
// predication and write muxes (including the neighbour links).
// The PE structure follows the architecture's PE figure; the select
// encodings are this design's.
module tb_pe;
  import pimsab_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] a, b, d1, d2, wd1, wd2, we1, we2, carry, mask;
  logic [3:0] tr; wsel_e sel1, sel2; pred_e pred;
  logic wps1, wps2, c_en, c_rst, m_en, m_rst, fl, fr, tl, trt;

  pe #(.N(N)) dut (.clk, .rst_n, .a, .b, .tr, .sel1, .sel2, .wps1, .wps2, .pred,
    .c_en, .c_rst, .m_en, .m_rst, .d_in1(d1), .d_in2(d2), .from_left(fl), .from_right(fr),
    .to_left(tl), .to_right(trt), .wd1, .wd2, .we1, .we2, .carry, .mask);

  logic [N-1:0] mc, mm;   // model latches

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [N-1:0] s, t, e1, e2, x1, x2, p, nr, nl;
    a = 0; b = 0; d1 = 0; d2 = 0; tr = 0; sel1 = WSEL_S; sel2 = WSEL_S; pred = PRED_NONE;
    wps1 = 0; wps2 = 0; c_en = 0; c_rst = 0; m_en = 0; m_rst = 0; fl = 0; fr = 0;
    mc = 0; mm = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      a = N'($urandom); b = N'($urandom); d1 = N'($urandom); d2 = N'($urandom);
      tr = 4'($urandom); sel1 = wsel_e'($urandom); sel2 = wsel_e'($urandom);
      pred = pred_e'($urandom); wps1 = 1'($urandom); wps2 = 1'($urandom);
      c_en = 1'($urandom); c_rst = ($urandom % 8) == 0; m_en = 1'($urandom); m_rst = ($urandom % 8) == 0;
      fl = 1'($urandom); fr = 1'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        t[i] = tr[{a[i], b[i]}];
        s[i] = t[i] ^ mc[i];
      end
      for (int i = 0; i < N; i++) begin
        nr[i] = (i == N-1) ? fr : s[i+1];
        nl[i] = (i == 0) ? fl : s[i-1];
      end
      case (pred) PRED_NONE: p = '1; PRED_MASK: p = mm; PRED_CARRY: p = mc; default: p = ~mm; endcase
      case (sel1) WSEL_S: x1 = s; WSEL_DIN: x1 = d1; WSEL_NB: x1 = nr; default: x1 = t; endcase
      case (sel2) WSEL_S: x2 = s; WSEL_DIN: x2 = d2; WSEL_NB: x2 = nl; default: x2 = t; endcase
      e1 = wps1 ? p : '0; e2 = wps2 ? p : '0;
      checks++; if (we1 !== e1 || we2 !== e2) begin failures++; $display("we mismatch it=%0d", it); end
      checks++; if ((wd1 & e1) !== (x1 & e1) || (wd2 & e2) !== (x2 & e2)) begin
        failures++; $display("wd mismatch it=%0d", it); end
      checks++; if (tl !== s[0] || trt !== s[N-1]) begin failures++; $display("link mismatch"); end
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (c_rst) mc[i] = 0; else if (c_en) mc[i] = (a[i]&b[i]) | (a[i]&mc[i]) | (b[i]&mc[i]);
        if (m_rst) mm[i] = 0; else if (m_en) mm[i] = t[i];
      end
      #1;
      checks++; if (carry !== mc || mask !== mm) begin failures++; $display("latch mismatch it=%0d", it); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
