// htree_switch: one switch of the intra-tile static H-tree. A buffered 5x5
// crossbar: port 0 faces the parent, ports 1..4 the four children. Every
// output is registered and driven by one of the other four inputs, chosen by
// 2 configuration bits (cfg[o]): input index = cfg[o] when cfg[o] < o, else
// cfg[o]+1 (so an output never selects its own input). Each link carries a
// tag (valid, destination row/CRAM) next to the WIDTH data bits.
// Latency: one cycle per switch. No flow control: the network is statically
// scheduled by the instruction controller.
// Follows the paper: 5 ports, each output driven by the other 4 inputs under
// 2 config bits, buffered. Own choice: the skip-own-port index encoding and
// the tag bits carried with the data.
module htree_switch
  import pimsab_pkg::*;
#(
  parameter int WIDTH = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [4:0][1:0]         cfg,
  input  ht_tag_t [4:0]           in_tag,
  input  logic [4:0][WIDTH-1:0]   in_data,
  output ht_tag_t [4:0]           out_tag,
  output logic [4:0][WIDTH-1:0]   out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_tag  <= '0;
      out_data <= '0;
    end else begin
      for (int o = 0; o < 5; o++) begin
        automatic int s = (int'(cfg[o]) < o) ? int'(cfg[o]) : int'(cfg[o]) + 1;
        out_tag[o]  <= in_tag[s];
        out_data[o] <= in_data[s];
      end
    end
  end
endmodule
