// fifo: synchronous first-in first-out buffer with valid/ready handshakes on
// both sides, used as the tile instruction queue, the router input buffers and
// the tile's NoC staging buffers. A word is written when in_valid && in_ready
// and removed when out_valid && out_ready; the head is available
// combinationally. in_ready depends only on the fill level (no combinational
// path from out_ready). count gives the fill level.
// The paper names an instruction queue and router input buffers; depth and
// handshake are this design's choice.
module fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  T                       in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output T                       out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign in_ready  = (count < ($clog2(DEPTH)+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];

  wire do_w = in_valid && in_ready;
  wire do_r = out_valid && out_ready;

  always_ff @(posedge clk) if (do_w) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_w) begin
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_r) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_w) - ($clog2(DEPTH)+1)'(do_r);
    end
  end

  // The fill level never exceeds the depth.
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
                            count <= ($clog2(DEPTH)+1)'(DEPTH));
endmodule
