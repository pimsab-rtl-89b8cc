// tb_transpose_unit: groups of p = 1..32-bit elements (W = 64 bits per word)
// in both directions, with random stalls on both sides. Forward output slice
// k must hold bit k of every element; reverse output must restore the packed
// words; a forward group followed by its reverse is the identity. Also checks
// the ping-pong throughput: with no stalls a stream of groups moves one word
// per cycle.
// The ping-pong scheme follows the architecture; the word width is reduced
// here for speed.
module tb_transpose_unit;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic dir; logic [2:0] lp; logic iv, ir, ov, orr; logic [W-1:0] id, od;
  transpose_unit #(.W(W)) dut (.clk, .rst_n, .dir, .lp, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // run groups of one (dir, lp) setting; returns cycles used
  task automatic run(input logic d, input int l, input int ngroups, input bit stalls, output int cycles);
    int p; logic [W-1:0] inq [$], expq [$];
    p = 1 << l;
    for (int g = 0; g < ngroups; g++) begin
      logic [W-1:0] in [32]; logic [32*W-1:0] bits;
      for (int w = 0; w < p; w++) begin in[w] = {$urandom, $urandom}; inq.push_back(in[w]); end
      for (int w = 0; w < p; w++) bits[w*W +: W] = in[w];
      for (int w = 0; w < p; w++) begin
        logic [W-1:0] e;
        for (int j = 0; j < W; j++) begin
          if (!d) e[j] = bits[j*p + w];                   // slice w, element j
          else begin int n; n = w*W + j; e[j] = bits[(n % p)*W + n/p]; end
        end
        expq.push_back(e);
      end
    end
    @(negedge clk); dir = d; lp = 3'(l);
    cycles = 0;
    while (expq.size() != 0 && cycles < 5000) begin
      iv = (inq.size() != 0) && (!stalls || $urandom % 3 != 0);
      if (inq.size() != 0) id = inq[0];
      orr = !stalls || ($urandom % 3 != 0);
      #1;
      if (ov && orr) begin
        checks++;
        if (od !== expq[0]) begin failures++; $display("dir %0d p %0d mismatch", d, p); end
        void'(expq.pop_front());
      end
      @(posedge clk);
      if (iv && ir) void'(inq.pop_front());
      cycles++;
      @(negedge clk);
    end
    iv = 0; orr = 0;
  endtask

  initial begin
    int cyc;
    dir = 0; lp = 0; iv = 0; orr = 0; id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l <= 5; l++) begin
      run(0, l, 3, 1, cyc);
      run(1, l, 3, 1, cyc);
    end
    // throughput: 4 groups of p=8 words, no stalls: 32 words in ~33 cycles
    run(0, 3, 4, 0, cyc);
    checks++;
    if (cyc > 4*8 + 8 + 1) begin failures++; $display("throughput: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
