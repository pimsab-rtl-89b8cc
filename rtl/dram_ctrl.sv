// dram_ctrl: front end of one DRAM channel, attached above a router of the top
// mesh row. It serves two packet kinds arriving from the NoC:
//   PK_DRD  read request (head flit only): it answers with a PK_DATA packet to
//           the requesting tile (head flit, then nflits body flits) holding the
//           words addr .. addr+nflits-1, bit-sliced by the transpose unit when
//           trp is set (nflits must then be a multiple of the precision).
//   PK_DWR  write: the nflits body flits that follow are written to addr ..,
//           un-transposed first when trp is set.
// DRAM side: a simple in-order request/response port, one W-bit word per
// request (req_valid/req_ready, req_we, req_addr, req_wdata; rsp_valid with
// rsp_data, no back-pressure). Reads are issued only while the response FIFO
// has room for every outstanding read. Requests are handled one at a time.
// Follows the paper: DRAM controllers on the top mesh edge with the transpose
// unit integrated and bypassable through the tr field. Own choices: packet
// formats, the DRAM port protocol, serial handling of requests. The memory
// controller proper (DRAM timing, refresh) and the PHY are outside.
module dram_ctrl
  import pimsab_pkg::*;
#(
  parameter int RSP_DEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  // NoC (to/from the router's north port)
  input  logic               noc_in_valid,
  output logic               noc_in_ready,
  input  flit_t              noc_in_flit,
  output logic               noc_out_valid,
  input  logic               noc_out_ready,
  output flit_t              noc_out_flit,
  // DRAM
  output logic               req_valid,
  input  logic               req_ready,
  output logic               req_we,
  output logic [31:0]        req_addr,
  output logic [FLIT_W-1:0]  req_wdata,
  input  logic               rsp_valid,
  input  logic [FLIT_W-1:0]  rsp_data
);
  typedef enum logic [2:0] {S_IDLE, S_RD_HEAD, S_RD_BODY, S_WR_BODY} state_e;
  state_e st;
  hdr_t   h;
  logic [7:0]  n_req, n_out, n_in;   // reads issued, flits sent, writes done
  logic [$clog2(RSP_DEPTH):0] outstanding, rcount;
  logic [2:0]  lp;
  hdr_t   in_hdr;
  logic   rsp_room;

  assign in_hdr = hdr_t'(noc_in_flit.data[HDR_W-1:0]);

  always_comb begin
    lp = 3'd0;
    for (int i = 0; i < 6; i++) if (h.prec == PREC_W'(1 << i)) lp = 3'(i);
  end

  // response FIFO
  logic         rf_valid, rf_ready;
  logic [FLIT_W-1:0] rf_data;
  fifo #(.T(logic [FLIT_W-1:0]), .DEPTH(RSP_DEPTH)) u_rsp (
    .clk, .rst_n, .in_valid(rsp_valid), .in_ready(rsp_room), .in_data(rsp_data),
    .out_valid(rf_valid), .out_ready(rf_ready), .out_data(rf_data), .count(rcount)
  );

  // transpose unit, shared by both directions
  logic         t_in_valid, t_in_ready, t_out_valid, t_out_ready;
  logic [FLIT_W-1:0] t_in_data, t_out_data;
  transpose_unit #(.W(FLIT_W)) u_tr (
    .clk, .rst_n, .dir(st == S_WR_BODY), .lp,
    .in_valid(t_in_valid), .in_ready(t_in_ready), .in_data(t_in_data),
    .out_valid(t_out_valid), .out_ready(t_out_ready), .out_data(t_out_data)
  );

  // datapath steering
  logic         src_valid;     // word ready to leave (NoC in read, DRAM in write)
  logic [FLIT_W-1:0] src_data;
  logic         src_take;
  always_comb begin
    noc_in_ready  = 1'b0;
    noc_out_valid = 1'b0;
    noc_out_flit  = '0;
    req_valid = 1'b0; req_we = 1'b0; req_addr = h.addr + 32'(n_req); req_wdata = '0;
    rf_ready = 1'b0;
    t_in_valid = 1'b0; t_in_data = '0; t_out_ready = 1'b0;
    src_valid = 1'b0; src_data = '0; src_take = 1'b0;
    unique case (st)
      S_IDLE: noc_in_ready = 1'b1;
      S_RD_HEAD: begin
        hdr_t r;
        r = '0;
        r.kind = PK_DATA; r.dx = h.sx; r.dy = h.sy; r.sx = my_x; r.sy = '0;
        r.nflits = h.nflits; r.trp = h.trp; r.prec = h.prec; r.addr = h.addr;
        noc_out_valid = 1'b1;
        noc_out_flit.head = 1'b1;
        noc_out_flit.tail = (h.nflits == 0);
        noc_out_flit.data = FLIT_W'(r);
      end
      S_RD_BODY: begin
        src_take = noc_out_ready;
        req_valid = (n_req < h.nflits) &&
                    (int'(outstanding) + int'(rcount) < RSP_DEPTH);
        // response FIFO -> (transpose) -> NoC
        if (h.trp) begin
          t_in_valid = rf_valid; t_in_data = rf_data; rf_ready = t_in_ready;
          src_valid = t_out_valid; src_data = t_out_data; t_out_ready = src_take;
        end else begin
          src_valid = rf_valid; src_data = rf_data; rf_ready = src_take;
        end
        noc_out_valid = src_valid;
        noc_out_flit.head = 1'b0;
        noc_out_flit.tail = (n_out == h.nflits - 8'd1);
        noc_out_flit.data = src_data;
      end
      default: begin // S_WR_BODY: NoC -> (transpose) -> DRAM writes
        src_take = req_ready;
        if (h.trp) begin
          t_in_valid = noc_in_valid && (n_in < h.nflits);
          t_in_data  = noc_in_flit.data;
          noc_in_ready = t_in_ready && (n_in < h.nflits);
          src_valid = t_out_valid; src_data = t_out_data; t_out_ready = src_take;
        end else begin
          src_valid = noc_in_valid; src_data = noc_in_flit.data;
          noc_in_ready = src_take;
        end
        req_valid = src_valid; req_we = 1'b1; req_wdata = src_data;
      end
    endcase
  end

  // Reads are only issued with room reserved, so a response is never lost.
  a_rsp_room: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> rsp_room);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; h <= '0; n_req <= '0; n_out <= '0; n_in <= '0; outstanding <= '0;
    end else begin
      outstanding <= outstanding + ($clog2(RSP_DEPTH)+1)'(req_valid && req_ready && !req_we)
                                 - ($clog2(RSP_DEPTH)+1)'(rsp_valid);
      unique case (st)
        S_IDLE: if (noc_in_valid && noc_in_flit.head) begin
          h <= in_hdr;
          n_req <= '0; n_out <= '0; n_in <= '0;
          if (in_hdr.kind == PK_DWR) st <= S_WR_BODY;
          else                                                    st <= S_RD_HEAD;
        end
        S_RD_HEAD: if (noc_out_ready) st <= (h.nflits == 0) ? S_IDLE : S_RD_BODY;
        S_RD_BODY: begin
          if (req_valid && req_ready) n_req <= n_req + 8'd1;
          if (noc_out_valid && noc_out_ready) begin
            n_out <= n_out + 8'd1;
            if (n_out == h.nflits - 8'd1) st <= S_IDLE;
          end
        end
        default: begin
          if (noc_in_valid && noc_in_ready) n_in <= n_in + 8'd1;
          if (req_valid && req_ready) begin
            n_req <= n_req + 8'd1;
            if (n_req == h.nflits - 8'd1) st <= S_IDLE;
          end
        end
      endcase
    end
  end
endmodule
