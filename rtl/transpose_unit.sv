// transpose_unit: converts between the packed element layout of DRAM and the
// bit-sliced layout of the CRAMs, for element precisions p = 2**lp (1..32
// bits; DRAM keeps elements at power-of-two widths).
//
// A group is p words of W bits, i.e. W elements of p bits. In forward mode
// (dir = 0, DRAM -> CRAM) the input words hold the elements packed
// (element e, bit k at linear bit e*p+k of the group) and output word k is
// bit slice k: bit e of output word k = bit k of element e. In reverse mode
// (dir = 1, CRAM -> DRAM) the input words are the slices and the output words
// the packed elements.
//
// Two banks of p*W bits work as a ping-pong buffer: input words fill one bank
// while the other, once full, is read out; then the roles swap. Handshakes are
// valid/ready on both sides. Throughput is one word per cycle in and out;
// the first output word of a group appears the cycle after its last input
// word was accepted. dir and lp must stay constant while a group is inside.
// Follows the paper: ping-pong buffer filled with untransposed data and read
// out as bit slices, usable in both directions. Own choices: power-of-two
// precisions only, one word per cycle on each side.
module transpose_unit #(
  parameter int W    = 1024,
  parameter int PMAX = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         dir,
  input  logic [2:0]   lp,        // log2 of the precision, 0..log2(PMAX)
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int RB = $clog2(PMAX);
  localparam int NB = PMAX * W;
  localparam int IB = $clog2(NB);

  logic [NB-1:0] bank [2];
  logic [1:0]    full;
  logic          wb, rb;             // bank being filled / read
  logic [RB-1:0] wc, rc;             // word counters
  logic [RB:0]   p;

  assign p = (RB+1)'(1) << lp;

  assign in_ready  = !full[wb];
  assign out_valid = full[rb];

  always_comb begin
    out_data = '0;
    for (int j = 0; j < W; j++) begin
      logic [IB-1:0] n, idx;
      n = '0;
      if (!dir) begin
        // output slice rc, bit j (element j): element j bit rc
        idx = (IB'(j) << lp) + IB'(rc);
      end else begin
        // output packed word rc, bit j: linear n -> element n>>lp, bit n%p
        n   = IB'(rc) * IB'(W) + IB'(j);
        idx = IB'(n & IB'(p - 1)) * IB'(W) + (n >> lp);
      end
      out_data[j] = bank[rb][idx];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) bank[wb][int'(wc)*W +: W] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; rb <= 1'b0; wc <= '0; rc <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if ((RB+1)'(wc) == p - 1) begin
          wc <= '0;
          full[wb] <= 1'b1;
          wb <= !wb;
        end else wc <= wc + 1'b1;
      end
      if (out_valid && out_ready) begin
        if ((RB+1)'(rc) == p - 1) begin
          rc <= '0;
          full[rb] <= 1'b0;
          rb <= !rb;
        end else rc <= rc + 1'b1;
      end
    end
  end
endmodule
