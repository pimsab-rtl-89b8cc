// tb_noc_router: a router at (2,2) gets random multi-flit packets on all five
// inputs with random destinations and random output back-pressure. Checks
// that each packet leaves on the X-Y route's port, that flits of a packet
// stay contiguous on an output (wormhole), that data is intact and in order
// per input/output pair, and that every packet arrives.
// Wormhole switching and X-Y routing follow the architecture; buffer depth
// and arbitration are this design's.
module tb_noc_router;
  import pimsab_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [4:0] iv, ir, ov, orr; flit_t [4:0] ifl, ofl;
  noc_router dut (.clk, .rst_n, .my_x(4'd2), .my_y(4'd2), .in_valid(iv), .in_ready(ir),
    .in_flit(ifl), .out_valid(ov), .out_ready(orr), .out_flit(ofl));

  function automatic int exp_port(hdr_t h);
    if (h.dx > 2) return 3; if (h.dx < 2) return 4;
    if (h.to_dram) return 1;
    if (h.dy > 2) return 2; if (h.dy < 2) return 1; return 0;
  endfunction

  // per input: list of flits to send
  flit_t txq [5][$];
  // expected flits per output, per input (order within a pair is kept)
  flit_t expq [5][5][$];
  int    cur_in [5];   // input currently owning each output (-1 none)
  int    sent = 0, recv = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    iv = 0; ifl = '0; orr = '1;
    for (int o = 0; o < 5; o++) cur_in[o] = -1;
    for (int i = 0; i < 5; i++)
      for (int n = 0; n < 30; n++) begin
        hdr_t h; int len, o; flit_t f;
        h = '0; h.dx = 4'($urandom % 5); h.dy = 4'($urandom % 5); h.to_dram = ($urandom % 6) == 0;
        h.sx = 4'(i); h.addr = n;
        o = exp_port(h);
        if (o == i && i != 0) begin h.dx = 4'd2; h.dy = 4'd2; h.to_dram = 0; o = 0; end
        len = $urandom % 4;
        for (int k = 0; k <= len; k++) begin
          f.head = (k == 0); f.tail = (k == len);
          f.data = (k == 0) ? FLIT_W'(h) : {$urandom, $urandom, 32'(i), 32'(n), 32'(k)};
          txq[i].push_back(f); expq[o][i].push_back(f); sent++;
        end
      end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 5000 && recv < sent; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < 5; i++) begin
        iv[i] = (txq[i].size() != 0) && ($urandom % 3 != 0);
        if (txq[i].size() != 0) ifl[i] = txq[i][0];
      end
      orr = 5'($urandom) | 5'($urandom);
      #1;
      for (int o = 0; o < 5; o++) if (ov[o] && orr[o]) begin
        int src; src = -1;
        if (ofl[o].head) begin
          for (int i = 0; i < 5; i++)
            if (expq[o][i].size() != 0 && expq[o][i][0] == ofl[o]) src = i;
          checks++;
          if (cur_in[o] != -1 || src < 0) begin failures++; $display("bad head on out %0d", o); end
          cur_in[o] = src;
        end else begin
          src = cur_in[o];
          checks++;
          if (src < 0) begin failures++; $display("body flit on idle out %0d", o); end
        end
        if (src >= 0) begin
          checks++;
          if (expq[o][src].size() == 0 || expq[o][src][0] != ofl[o]) begin
            failures++; $display("out %0d flit mismatch from in %0d", o, src); end
          else begin void'(expq[o][src].pop_front()); recv++; end
        end
        if (ofl[o].tail) cur_in[o] = -1;
      end
      @(posedge clk);
      for (int i = 0; i < 5; i++) if (iv[i] && ir[i]) void'(txq[i].pop_front());
    end
    checks++; if (recv != sent) begin failures++; $display("received %0d of %0d", recv, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
