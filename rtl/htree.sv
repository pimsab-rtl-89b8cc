// htree: the static, circuit-switched H-tree that links the NCRAM CRAMs of a
// tile to each other and to the tile controller. It is a 4-ary tree of
// htree_switch instances: LEVELS = log4(NCRAM) levels, level 0 next to the
// CRAMs, the single root at level LEVELS-1 whose parent port faces the
// controller. Each switch is configured with 2 bits per output; this module
// derives those bits from a compact transfer configuration:
//
//   lvl_mode = 0 (normal): every switch routes its parent input to all of
//     its children (broadcast down from the root), and routes upward the
//     child on the path of the source CRAM src_idx. src_idx may change every
//     cycle: the switch at level l uses src_idx delayed by l cycles, which
//     is when that word reaches it. A word injected at the root reaches all
//     CRAMs after LEVELS cycles; a word read from CRAM s reaches the root
//     output after LEVELS cycles.
//   lvl_mode = 1 (level transfer): all switches below level lvl pass child 0
//     up and their parent input down; each switch at level lvl sends its child
//     sc to its child dc. All such pairs move in parallel (2*lvl+1 cycles),
//     which is how partial sums are reduced across CRAMs.
//
// Which CRAMs drive and which write is decided at the leaves (see tile).
// Follows the paper: H-tree topology, static configuration, switches as in
// htree_switch. Own choices: the two configuration modes, fixed up/down
// routing through the root for CRAM-to-CRAM copies.
module htree
  import pimsab_pkg::*;
#(
  parameter int NCRAM = 256,
  parameter int WIDTH = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        lvl_mode,
  input  logic [2:0]                  lvl,
  input  logic [1:0]                  sc,
  input  logic [1:0]                  dc,
  input  logic [CIDX_W-1:0]           src_idx,
  // leaves
  input  ht_tag_t [NCRAM-1:0]         leaf_in_tag,
  input  logic [NCRAM-1:0][WIDTH-1:0] leaf_in_data,
  output ht_tag_t [NCRAM-1:0]         leaf_out_tag,
  output logic [NCRAM-1:0][WIDTH-1:0] leaf_out_data,
  // root parent port
  input  ht_tag_t                     root_in_tag,
  input  logic [WIDTH-1:0]            root_in_data,
  output ht_tag_t                     root_out_tag,
  output logic [WIDTH-1:0]            root_out_data
);
  localparam int LEVELS = $clog2(NCRAM) / 2;
  localparam int NSW    = (NCRAM - 1) / 3;   // 4^0 + ... + 4^(LEVELS-1)

  // Switch (l,k) is stored at flat index base(l)+k, base(l) counts the
  // switches of the levels below.
  function automatic int base(int l);
    int b = 0;
    for (int i = 0; i < l; i++) b += NCRAM >> (2*(i+1));
    return b;
  endfunction

  ht_tag_t [NSW-1:0][4:0]            sw_in_tag,  sw_out_tag;
  logic    [NSW-1:0][4:0][WIDTH-1:0] sw_in_data, sw_out_data;
  logic    [NSW-1:0][4:0][1:0]       sw_cfg;

  logic [LEVELS-1:0][CIDX_W-1:0] src_d;   // src_d[l] = src_idx l cycles ago
  logic [LEVELS-1:0][CIDX_W-1:0] src_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) src_q <= '0;
    else        src_q <= src_d;
  end
  always_comb begin
    src_d[0] = src_idx;
    for (int l = 1; l < LEVELS; l++) src_d[l] = src_q[l-1];
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int NK = NCRAM >> (2*(l+1));
    for (genvar k = 0; k < NK; k++) begin : g_sw
      localparam int ID = base(l) + k;

      // configuration
      always_comb begin
        logic [1:0] digit;
        digit = src_d[l][2*l +: 2];
        sw_cfg[ID] = '0;                 // children take the parent input
        if (!lvl_mode) begin
          sw_cfg[ID][0] = digit;         // parent output takes child 'digit'
        end else if (l < int'(lvl)) begin
          sw_cfg[ID][0] = 2'd0;          // parent output takes child 0
        end else if (l == int'(lvl)) begin
          // output dc+1 takes input sc+1 (skip-own-port encoding)
          sw_cfg[ID][dc+1] = (sc < dc) ? sc + 2'd1 : sc;
        end
      end

      // children inputs and parent output of the level below / leaves
      for (genvar j = 0; j < 4; j++) begin : g_ch
        if (l == 0) begin : g_leaf
          assign sw_in_tag[ID][j+1]  = leaf_in_tag[4*k+j];
          assign sw_in_data[ID][j+1] = leaf_in_data[4*k+j];
          assign leaf_out_tag[4*k+j]  = sw_out_tag[ID][j+1];
          assign leaf_out_data[4*k+j] = sw_out_data[ID][j+1];
        end else begin : g_sub
          localparam int CID = base(l-1) + 4*k + j;
          assign sw_in_tag[ID][j+1]  = sw_out_tag[CID][0];
          assign sw_in_data[ID][j+1] = sw_out_data[CID][0];
          assign sw_in_tag[CID][0]   = sw_out_tag[ID][j+1];
          assign sw_in_data[CID][0]  = sw_out_data[ID][j+1];
        end
      end

      if (l == LEVELS-1) begin : g_root
        assign sw_in_tag[ID][0]  = root_in_tag;
        assign sw_in_data[ID][0] = root_in_data;
        assign root_out_tag  = sw_out_tag[ID][0];
        assign root_out_data = sw_out_data[ID][0];
      end

      htree_switch #(.WIDTH(WIDTH)) u_sw (
        .clk, .rst_n, .cfg(sw_cfg[ID]),
        .in_tag(sw_in_tag[ID]), .in_data(sw_in_data[ID]),
        .out_tag(sw_out_tag[ID]), .out_data(sw_out_data[ID])
      );
    end
  end

  initial assert (NCRAM >= 4 && (1 << (2*LEVELS)) == NCRAM)
    else $fatal(1, "htree: NCRAM must be a power of 4");
endmodule
