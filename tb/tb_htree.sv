// tb_htree: a 16-leaf (2-level) H-tree. Checks (1) upward routing with a
// source that changes every cycle reaches the root after LEVELS cycles,
// (2) a word injected at the root reaches every leaf after LEVELS cycles,
// (3) level transfers: at level l every child sc sends to child dc in all
// switches at once, arriving after 2l+1 cycles.
// The radix-4 tree of 5-port switches follows the architecture; the
// latencies checked are those of this design's registered switches.
module tb_htree;
  import pimsab_pkg::*;
  localparam int N = 16, W = 16, L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lm; logic [2:0] lvl; logic [1:0] sc, dc; logic [CIDX_W-1:0] src;
  ht_tag_t [N-1:0] lit, lot; logic [N-1:0][W-1:0] lid, lod;
  ht_tag_t rit, rot; logic [W-1:0] rid, rod;
  htree #(.NCRAM(N), .WIDTH(W)) dut (.clk, .rst_n, .lvl_mode(lm), .lvl, .sc, .dc, .src_idx(src),
    .leaf_in_tag(lit), .leaf_in_data(lid), .leaf_out_tag(lot), .leaf_out_data(lod),
    .root_in_tag(rit), .root_in_data(rid), .root_out_tag(rot), .root_out_data(rod));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int srcs [$]; logic [W-1:0] sent [$];
  initial begin
    lm = 0; lvl = 0; sc = 0; dc = 0; src = 0; lit = '0; lid = '0; rit = '0; rid = '0;
    for (int c = 0; c < N; c++) lid[c] = W'(16'hA000 + c);
    repeat (2) @(posedge clk); rst_n = 1;
    // (1) up: every leaf carries its own id; source changes each cycle
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      src = CIDX_W'($urandom % N);
      for (int c = 0; c < N; c++) begin lit[c] = '0; lit[c].valid = (c == int'(src)); end
      srcs.push_back(int'(src));
      if (t >= L) begin
        int s; s = srcs.pop_front();
        checks++;
        if (!rot.valid || rod !== W'(16'hA000 + s)) begin
          failures++; $display("up: expected leaf %0d got %h", s, rod); end
      end
    end
    // (2) down broadcast
    @(negedge clk); for (int c = 0; c < N; c++) lit[c] = '0;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      rit = '0; rit.valid = 1; rit.row = ROW_W'(t); rid = W'($urandom);
      sent.push_back(rid);
      if (t >= L) begin
        logic [W-1:0] e; e = sent.pop_front();
        for (int c = 0; c < N; c++) begin
          checks++;
          if (!lot[c].valid || lod[c] !== e || lot[c].row != ROW_W'(t - L)) begin
            failures++; $display("down: leaf %0d", c); end
        end
      end
    end
    @(negedge clk); rit = '0;
    // (3) level transfers
    for (int l = 0; l < L; l++) begin
      for (int n = 0; n < 6; n++) begin
        @(negedge clk);
        lm = 1; lvl = 3'(l); sc = 2'($urandom); dc = 2'($urandom);
        if (dc == sc) dc = sc + 2'd1;
        for (int c = 0; c < N; c++) begin lit[c] = '0; lit[c].valid = 1; lid[c] = W'($urandom); end
        begin
          logic [N-1:0][W-1:0] d0; d0 = lid;
          repeat (2*l + 1) @(posedge clk);
          #1;
          for (int c = 0; c < N; c++) begin
            // leaf c with digit l == dc and lower digits 0 receives from the
            // leaf with digit l == sc (same upper digits, lower digits 0)
            if (((c >> (2*l)) & 3) == int'(dc) && (c & ((1 << (2*l)) - 1)) == 0) begin
              int s; s = c - (int'(dc) << (2*l)) + (int'(sc) << (2*l));
              checks++;
              if (!lot[c].valid || lod[c] !== d0[s]) begin
                failures++; $display("level %0d: leaf %0d expected from %0d", l, c, s); end
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
