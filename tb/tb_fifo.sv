// tb_fifo: random push/pop against a queue model; checks order, full/empty
// flags and the fill level.
// The queue depth and handshake are this design's choices.
module tb_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv, ir, ov, orr; logic [31:0] id, od; logic [4:0] cnt;
  logic [31:0] q [$];
  fifo #(.T(logic [31:0]), .DEPTH(16)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od), .count(cnt));
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    iv = 0; orr = 0; id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      iv = ($urandom % 4) < (it < 2500 ? 3 : 1); orr = ($urandom % 4) < (it < 2500 ? 1 : 3); id = $urandom;
      #1;
      checks++;
      if (int'(cnt) != q.size() || ov != (q.size() != 0) || ir != (q.size() < 16)) begin
        failures++; $display("flag mismatch size=%0d cnt=%0d", q.size(), cnt); end
      if (ov && orr) begin
        checks++; if (od !== q[0]) begin failures++; $display("data mismatch"); end
      end
      @(posedge clk);
      if (ov && orr) void'(q.pop_front());
      if (iv && ir) q.push_back(id);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
