// tb_subtree_pipeline: self-checking test of one dual-lane subtree pipeline.
// Loads a complete 5-level subtree whose in-order node keys are 2,4,...,62,
// then starts a random key on each lane every cycle (present, absent, below
// and above the range) and checks each lane's result, its value and that it
// leaves exactly SUB_LEVELS+1 cycles after entry.
module tb_subtree_pipeline;
  import bst_pkg::*;

  localparam int unsigned L   = 5;
  localparam int unsigned N   = (1 << L) - 1;
  localparam int unsigned LW  = 3;
  localparam int unsigned WIW = L - 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  logic [1:0] in_valid;
  query_t [1:0] in_query;
  logic wr_en;
  logic [LW-1:0] wr_level;
  logic [WIW-1:0] wr_index;
  node_t wr_node;
  result_t [1:0] res;

  int checks = 0, failures = 0, cycle = 0;
  int found_seen = 0, miss_seen = 0;

  subtree_pipeline #(.SUB_LEVELS(L), .LW(LW), .IW(L), .WIW(WIW)) dut (.*);

  always @(posedge clk) cycle++;

  // In-order position of node i at level j of an L-level complete tree.
  function automatic int unsigned key_of(int unsigned j, int unsigned i);
    return 2 * ((2 * i + 1) * (1 << (L - 1 - j)) - 1) + 2;
  endfunction
  function automatic val_t val_of(key_t k);
    return k * 32'd1000 + 32'd7;
  endfunction

  typedef struct { query_t q; int due; } exp_t;
  exp_t expq [2][$];

  always @(negedge clk) begin
    for (int l = 0; l < 2; l++) begin
      if (res[l].valid) begin
        exp_t e;
        bit in_tree;
        checks++;
        if (expq[l].size() == 0) begin
          failures++; $display("FAIL lane %0d: unexpected result", l);
        end else begin
          e = expq[l].pop_front();
          in_tree = (e.q.key % 2 == 0) && e.q.key >= 2 && e.q.key <= 2 * N;
          if (res[l].query !== e.q || res[l].found !== in_tree ||
              (in_tree && res[l].value !== val_of(e.q.key)) || cycle != e.due) begin
            failures++;
            $display("FAIL lane %0d key %0d: found=%0d val=%0d at %0d, exp found=%0d due %0d",
                     l, e.q.key, res[l].found, res[l].value, cycle, in_tree, e.due);
          end
          if (in_tree) found_seen++; else miss_seen++;
        end
      end
    end
  end

  initial begin
    rst_n = 0; in_valid = '0; in_query = '0; wr_en = 0; wr_level = '0; wr_index = '0;
    wr_node = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < L; j++)
      for (int i = 0; i < (1 << j); i++) begin
        wr_en = 1; wr_level = LW'(j); wr_index = WIW'(i);
        wr_node.key = key_of(j, i); wr_node.value = val_of(key_of(j, i));
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      for (int l = 0; l < 2; l++) begin
        in_valid[l] = ($urandom_range(9) != 0);
        in_query[l].key = $urandom_range(2 * N + 3);
        in_query[l].tag = tag_t'(t * 2 + l);
        if (in_valid[l]) begin
          exp_t e;
          e.q = in_query[l]; e.due = cycle + L + 1;
          expq[l].push_back(e);
        end
      end
      @(negedge clk);
    end
    in_valid = '0;
    repeat (L + 4) @(negedge clk);
    checks++;
    if (expq[0].size() != 0 || expq[1].size() != 0 || found_seen == 0 || miss_seen == 0) begin
      failures++; $display("FAIL leftover or no hits/misses");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
