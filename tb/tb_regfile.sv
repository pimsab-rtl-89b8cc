// tb_regfile: single writes, parallel all-entry write, reset and both read
// ports checked against a model array.
// The 32 x 32-bit size follows the architecture; the ports are this design's.
module tb_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, pwe; logic [4:0] wa, r0, r1; logic [31:0] wd, d0, d1; logic [1023:0] pwd;
  logic [31:0] m [32];
  regfile dut (.clk, .rst_n, .we, .waddr(wa), .wdata(wd), .par_we(pwe), .par_wdata(pwd),
               .raddr0(r0), .rdata0(d0), .raddr1(r1), .rdata1(d1));
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; pwe = 0; wa = 0; wd = 0; pwd = 0; r0 = 0; r1 = 0;
    for (int i = 0; i < 32; i++) m[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      r0 = 5'($urandom); r1 = 5'($urandom); #1;
      checks++; if (d0 !== m[r0] || d1 !== m[r1]) begin failures++; $display("read mismatch"); end
      we = 1'($urandom); pwe = ($urandom % 50) == 0; wa = 5'($urandom); wd = $urandom;
      for (int i = 0; i < 32; i++) pwd[i*32 +: 32] = $urandom;
      @(posedge clk);
      if (pwe) for (int i = 0; i < 32; i++) m[i] = pwd[i*32 +: 32];
      else if (we) m[wa] = wd;
      #1; we = 0; pwe = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
