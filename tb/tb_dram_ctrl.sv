// tb_dram_ctrl: read requests (plain and transposed, p = 4 and 8) must come
// back as a data packet addressed to the requester, with the right words or
// bit slices; write packets (plain and transposed) must land in the DRAM
// model as packed words. Random back-pressure on the NoC output and the DRAM
// request port.
// The transposition and its bypass follow the architecture; packet formats
// and the DRAM port protocol are this design's.
module tb_dram_ctrl;
  import pimsab_pkg::*;
  localparam int W = FLIT_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic niv, nir, nov, nor_; flit_t nif, nof;
  logic rqv, rqr, rqwe, rsv; logic [31:0] rqa; logic [W-1:0] rqd, rsd;
  dram_ctrl dut (.clk, .rst_n, .my_x(4'd3), .noc_in_valid(niv), .noc_in_ready(nir), .noc_in_flit(nif),
    .noc_out_valid(nov), .noc_out_ready(nor_), .noc_out_flit(nof),
    .req_valid(rqv), .req_ready(rqr), .req_we(rqwe), .req_addr(rqa), .req_wdata(rqd),
    .rsp_valid(rsv), .rsp_data(rsd));
  dram_model #(.W(W)) mem (.clk, .req_valid(rqv), .req_ready(rqr), .req_we(rqwe), .req_addr(rqa),
    .req_wdata(rqd), .rsp_valid(rsv), .rsp_data(rsd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v; for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom; return v;
  endfunction

  task automatic send(input flit_t f);
    @(negedge clk); niv = 1; nif = f; #1;
    while (!nir) begin @(negedge clk); #1; end
    @(negedge clk); niv = 0;
  endtask

  // slice k of a group of p packed words
  function automatic logic [W-1:0] slice(input logic [W-1:0] g [32], input int p, input int k);
    logic [W-1:0] s;
    for (int e = 0; e < W; e++) begin int n; n = e*p + k; s[e] = g[n / W][n % W]; end
    return s;
  endfunction

  task automatic read_req(input int addr, input int n, input bit trp, input int p);
    hdr_t h; flit_t f; logic [W-1:0] g [32]; int got;
    h = '0; h.kind = PK_DRD; h.to_dram = 1; h.dx = 3; h.sx = 4'd5; h.sy = 4'd2;
    h.addr = addr; h.nflits = 8'(n); h.trp = trp; h.prec = PREC_W'(p);
    f.head = 1; f.tail = 1; f.data = W'(h);
    send(f);
    got = -1;
    while (got < n) begin
      @(negedge clk); nor_ = ($urandom % 3) != 0; #1;
      if (nov && nor_) begin
        if (got < 0) begin
          hdr_t r; r = hdr_t'(nof.data[HDR_W-1:0]);
          checks++;
          if (!nof.head || r.kind != PK_DATA || r.dx != 5 || r.dy != 2 || r.nflits != n) begin
            failures++; $display("bad reply header"); end
        end else begin
          logic [W-1:0] e;
          if (!trp) e = mem.peek(addr + got);
          else begin
            int gi; gi = got / p;
            for (int w = 0; w < p; w++) g[w] = mem.peek(addr + gi*p + w);
            e = slice(g, p, got % p);
          end
          checks++;
          if (nof.data !== e || nof.tail != (got == n-1)) begin
            failures++; $display("read word %0d mismatch (trp=%0d)", got, trp); end
        end
        got++;
      end
    end
    @(negedge clk); nor_ = 0;
  endtask

  task automatic write_req(input int addr, input int n, input bit trp, input int p);
    hdr_t h; flit_t f; logic [W-1:0] pk [64]; logic [W-1:0] g [32];
    h = '0; h.kind = PK_DWR; h.to_dram = 1; h.dx = 3; h.addr = addr; h.nflits = 8'(n);
    h.trp = trp; h.prec = PREC_W'(p);
    f.head = 1; f.tail = (n == 0); f.data = W'(h);
    send(f);
    for (int w = 0; w < n; w++) pk[w] = rnd();
    for (int w = 0; w < n; w++) begin
      f.head = 0; f.tail = (w == n-1);
      if (!trp) f.data = pk[w];
      else begin
        int gi; gi = w / p;
        for (int q = 0; q < p; q++) g[q] = pk[gi*p + q];
        f.data = slice(g, p, w % p);
      end
      send(f);
    end
    repeat (20) @(posedge clk);
    for (int w = 0; w < n; w++) begin
      checks++;
      if (mem.peek(addr + w) !== pk[w]) begin failures++; $display("write word %0d (trp=%0d)", w, trp); end
    end
  endtask

  initial begin
    niv = 0; nif = '0; nor_ = 0;
    for (int a = 0; a < 64; a++) mem.poke(a, rnd());
    repeat (2) @(posedge clk); rst_n = 1;
    read_req(3, 5, 0, 8);
    read_req(8, 16, 1, 8);
    read_req(40, 8, 1, 4);
    write_req(100, 6, 0, 8);
    write_req(200, 16, 1, 8);
    read_req(200, 8, 1, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
