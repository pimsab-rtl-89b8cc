// shuffle: the shuffle logic at the periphery of one CRAM. A word arriving
// from the H-tree is rearranged before it is written, so that data loaded
// once can be replicated across bitlines and CRAMs (e.g. for GEMM operands).
// Purely combinational.
//
// Patterns (shf, with factor R = 2**shf_log):
//   SHF_NONE  bitline b gets bit b.
//   SHF_DUP   each input bit is repeated R times along the tile-wide vector:
//             global bitline g = idx*COLS + b gets bit (g / R) mod COLS.
//             With R = COLS this is the paper's example: bit 0 fills every
//             bitline of CRAM 0, bit 1 every bitline of CRAM 1, and so on.
//   SHF_REP   the first R bits are repeated every R bitlines: b gets bit b mod R.
// The paper says only that "shf specifies the stride"; the two pattern
// families and their encoding are this design's choice.
module shuffle
  import pimsab_pkg::*;
#(
  parameter int COLS = 256
) (
  input  logic [CIDX_W-1:0] idx,      // this CRAM's index in the tile
  input  shf_e              shf,
  input  logic [3:0]        shf_log,
  input  logic [COLS-1:0]   din,
  output logic [COLS-1:0]   dout
);
  localparam int CB = $clog2(COLS);

  always_comb begin
    logic [CIDX_W+CB-1:0] g;
    logic [CB-1:0]        sel;
    for (int b = 0; b < COLS; b++) begin
      g = CIDX_W'(idx) * (CIDX_W+CB)'(COLS) + (CIDX_W+CB)'(b);
      unique case (shf)
        SHF_DUP: sel = CB'(g >> shf_log);
        SHF_REP: sel = CB'(b) & CB'((32'd1 << shf_log) - 1);
        default: sel = CB'(b);
      endcase
      dout[b] = din[sel];
    end
  end
endmodule
