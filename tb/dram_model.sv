// dram_model: behavioural model of one DRAM channel for testbenches only.
// Words of W bits, in-order responses a fixed LAT cycles after each read
// request, random request back-pressure when STALL is set. Writes take
// effect at once. Not synthesizable (associative array storage).
module dram_model #(
  parameter int W     = 1024,
  parameter int LAT   = 6,
  parameter bit STALL = 1
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [31:0]   req_addr,
  input  logic [W-1:0]  req_wdata,
  output logic          rsp_valid,
  output logic [W-1:0]  rsp_data
);
  logic [W-1:0] mem [int unsigned];
  logic [W-1:0] pipe_d [LAT];
  logic         pipe_v [LAT];

  function automatic logic [W-1:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  function automatic void poke(int unsigned a, logic [W-1:0] d);
    mem[a] = d;
  endfunction

  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    req_ready = 1;
  end
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= req_valid && req_ready && !req_we;
    pipe_d[0] <= peek(req_addr);
    if (req_valid && req_ready && req_we) mem[req_addr] = req_wdata;
    req_ready <= !STALL || ($urandom % 4 != 0);
  end
endmodule
