// pe: the row of bit-serial processing elements under the bitlines of one
// CRAM, one lane per bitline (N lanes). Each lane is the PE of the CoMeFa-style
// dual-port CRAM: the TR mux applies a 4-entry truth table to the two sensed
// bits A and B; an XOR with the carry latch C gives S (A^B^C when TR is XOR,
// i.e. a full adder); the carry latch takes the full-adder carry out
// maj(A,B,C); the mask latch M takes the TR output; the predication mux P
// chooses which latch (or none) gates the two write drivers; the write muxes
// W1/W2 choose what each port writes. Neighbour links carry S one lane
// left/right; the outer lanes connect to the neighbouring CRAMs.
//
// Interface: a/b are the sensed words of ports 1 and 2 (combinational in the
// same cycle), the micro-op fields come from the CRAM; wd1/wd2 and we1/we2 are
// per-lane write data and predicated write enables, written by the CRAM on the
// next clock edge. C and M update on the same edge; c_rst/m_rst win over
// c_en/m_en. Timing: one micro-op per cycle, results visible next cycle.
//
// Follows the paper: TR mux, XOR X, carry latch, mask latch loaded from TR,
// predication by mask or carry, two write drivers, left/right PE links.
// Own choices: TR index is {A,B}; the exact set of write-mux and predicate
// inputs (see pimsab_pkg wsel_e / pred_e); both neighbour links carry S;
// the N lanes are one vectorised module rather than N instances.
module pe
  import pimsab_pkg::*;
#(
  parameter int N = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] a,          // port-1 sense amp (BL1)
  input  logic [N-1:0] b,          // port-2 sense amp (BL2)
  input  logic [3:0]   tr,
  input  wsel_e        sel1,
  input  wsel_e        sel2,
  input  logic         wps1,
  input  logic         wps2,
  input  pred_e        pred,
  input  logic         c_en,
  input  logic         c_rst,
  input  logic         m_en,
  input  logic         m_rst,
  input  logic [N-1:0] d_in1,
  input  logic [N-1:0] d_in2,
  input  logic         from_left,  // into lane 0 from the CRAM on the left
  input  logic         from_right, // into lane N-1 from the CRAM on the right
  output logic         to_left,    // S of lane 0
  output logic         to_right,   // S of lane N-1
  output logic [N-1:0] wd1,
  output logic [N-1:0] wd2,
  output logic [N-1:0] we1,
  output logic [N-1:0] we2,
  output logic [N-1:0] carry,
  output logic [N-1:0] mask
);

  logic [N-1:0] trv, s, cout, p, nb_r, nb_l;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      trv[i]  = tr[{a[i], b[i]}];
      s[i]    = trv[i] ^ carry[i];
      cout[i] = (a[i] & b[i]) | (a[i] & carry[i]) | (b[i] & carry[i]);
    end
  end

  // Neighbour values: lane i receives S of lane i+1 (from right) and of
  // lane i-1 (from left).
  assign nb_r = {from_right, s[N-1:1]};
  assign nb_l = {s[N-2:0], from_left};
  assign to_left  = s[0];
  assign to_right = s[N-1];

  always_comb begin
    unique case (pred)
      PRED_NONE:  p = '1;
      PRED_MASK:  p = mask;
      PRED_CARRY: p = carry;
      default:    p = ~mask;
    endcase
  end

  always_comb begin
    unique case (sel1)
      WSEL_S:   wd1 = s;
      WSEL_DIN: wd1 = d_in1;
      WSEL_NB:  wd1 = nb_r;
      default:  wd1 = trv;
    endcase
    unique case (sel2)
      WSEL_S:   wd2 = s;
      WSEL_DIN: wd2 = d_in2;
      WSEL_NB:  wd2 = nb_l;
      default:  wd2 = trv;
    endcase
  end

  assign we1 = {N{wps1}} & p;
  assign we2 = {N{wps2}} & p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry <= '0;
      mask  <= '0;
    end else begin
      if (c_rst)     carry <= '0;
      else if (c_en) carry <= cout;
      if (m_rst)     mask  <= '0;
      else if (m_en) mask  <= trv;
    end
  end

endmodule
