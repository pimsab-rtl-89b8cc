// regfile: the per-tile register file holding scalars and constants in
// untransposed form (NREG entries of W bits). Flip-flops, so that all entries
// can be written in one cycle (par_we loads the NREG*W-bit word par_wdata,
// entry i from bits [i*W +: W]) besides the single-entry write port.
// Two combinational read ports. Reset clears all entries.
// Follows the paper: 32 x 32-bit, flip-flop based, parallel write. Own
// choices: the number of ports and par_we having priority.
module regfile #(
  parameter int NREG = 32,
  parameter int W    = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [$clog2(NREG)-1:0] waddr,
  input  logic [W-1:0]            wdata,
  input  logic                    par_we,
  input  logic [NREG*W-1:0]       par_wdata,
  input  logic [$clog2(NREG)-1:0] raddr0,
  output logic [W-1:0]            rdata0,
  input  logic [$clog2(NREG)-1:0] raddr1,
  output logic [W-1:0]            rdata1
);
  logic [W-1:0] r [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) r[i] <= '0;
    end else if (par_we) begin
      for (int i = 0; i < NREG; i++) r[i] <= par_wdata[i*W +: W];
    end else if (we) begin
      r[waddr] <= wdata;
    end
  end

  assign rdata0 = r[raddr0];
  assign rdata1 = r[raddr1];
endmodule
