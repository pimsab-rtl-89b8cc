// tb_htree_switch: random configurations and inputs; each registered output
// must equal the input chosen by the skip-own-port encoding one cycle later.
// Five ports and 2 configuration bits per output follow the architecture;
// the code-to-port mapping is this design's.
module tb_htree_switch;
  import pimsab_pkg::*;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [4:0][1:0] cfg; ht_tag_t [4:0] it, ot; logic [4:0][W-1:0] id, od;
  htree_switch #(.WIDTH(W)) dut (.clk, .rst_n, .cfg, .in_tag(it), .in_data(id), .out_tag(ot), .out_data(od));
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cfg = 0; it = 0; id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      logic [4:0][1:0] c; ht_tag_t [4:0] t; logic [4:0][W-1:0] d;
      @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        cfg[p] = 2'($urandom); id[p] = W'($urandom);
        it[p] = ht_tag_t'($urandom);
      end
      c = cfg; t = it; d = id;
      @(posedge clk); #1;
      for (int o = 0; o < 5; o++) begin
        int s;
        s = (int'(c[o]) < o) ? int'(c[o]) : int'(c[o]) + 1;
        checks++;
        if (od[o] !== d[s] || ot[o] !== t[s] || s == o) begin
          failures++; $display("out %0d cfg %0d mismatch", o, c[o]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
