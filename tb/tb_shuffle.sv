// tb_shuffle: every pattern and factor for several CRAM indices, compared with
// the index formulas (NONE: b; DUP: (idx*COLS+b)/R mod COLS; REP: b mod R).
// Duplicate and repeat patterns follow the architecture's examples; the
// encoding and factor range are this design's.
module tb_shuffle;
  import pimsab_pkg::*;
  localparam int COLS = 256;
  int checks = 0, failures = 0;
  logic [CIDX_W-1:0] idx; shf_e shf; logic [3:0] lg; logic [COLS-1:0] din, dout;
  shuffle #(.COLS(COLS)) dut (.idx, .shf, .shf_log(lg), .din, .dout);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 300; it++) begin
      logic [COLS-1:0] exp;
      idx = CIDX_W'($urandom); shf = shf_e'($urandom % 3); lg = 4'($urandom % 9);
      for (int w = 0; w < COLS/32; w++) din[w*32 +: 32] = $urandom;
      #1;
      for (int bb = 0; bb < COLS; bb++) begin
        int g, s;
        g = int'(idx) * COLS + bb;
        case (shf)
          SHF_DUP: s = (g >> lg) % COLS;
          SHF_REP: s = bb % (1 << lg);
          default: s = bb;
        endcase
        exp[bb] = din[s];
      end
      checks++;
      if (dout !== exp) begin failures++; $display("mismatch idx=%0d shf=%0d lg=%0d", idx, shf, lg); end
    end
    // the paper's example: factor 256, bit c fills CRAM c
    idx = 3; shf = SHF_DUP; lg = 8; din = '0; din[3] = 1'b1; #1;
    checks++; if (dout !== '1) begin failures++; $display("example failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
