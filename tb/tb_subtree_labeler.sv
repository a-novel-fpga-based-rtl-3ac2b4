// tb_subtree_labeler: self-checking test of the label stage. Random chunks of
// 16 keys with random subtree numbers (8 subtrees) and random hits enter; one
// cycle later each searching key's label must equal the number of earlier
// searching keys of the chunk with the same subtree, each subtree's count the
// number of its keys, and the chunk must be held while advance=0. Includes
// chunks where all keys go to one subtree.
module tb_subtree_labeler;
  import bst_pkg::*;

  localparam int unsigned C = 16;
  localparam int unsigned S = 8;
  localparam int unsigned SW = 3;
  localparam int unsigned CW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, advance;
  logic [C-1:0] in_valid, in_found, out_valid, out_found;
  query_t [C-1:0] in_query, out_query;
  val_t [C-1:0] in_value, out_value;
  logic [SW-1:0] in_sub [C], out_sub [C];
  logic [CW-1:0] out_rank [C];
  logic [CW-1:0] out_count [S];

  int checks = 0, failures = 0;
  int exp_rank [C];
  int exp_count [S];
  logic [C-1:0] exp_v, exp_f;
  query_t [C-1:0] exp_q;

  subtree_labeler #(.CHUNK(C), .NUM_SUB(S), .SW(SW), .CW(CW)) dut (.*);

  initial begin
    rst_n = 0; advance = 0; in_valid = '0; in_found = '0; in_query = '0; in_value = '0;
    foreach (in_sub[k]) in_sub[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int same;
      int seen [S];
      same = ($urandom_range(4) == 0) ? int'($urandom_range(S - 1)) : -1;
      advance = 1;
      foreach (seen[s]) seen[s] = 0;
      for (int k = 0; k < C; k++) begin
        in_valid[k] = ($urandom_range(5) != 0);
        in_found[k] = ($urandom_range(6) == 0);
        in_sub[k]   = (same >= 0) ? SW'(same) : SW'($urandom_range(S - 1));
        in_query[k] = query_t'({$urandom, $urandom});
        in_value[k] = $urandom;
        if (in_valid[k] && !in_found[k]) begin
          exp_rank[k] = seen[in_sub[k]];
          seen[in_sub[k]]++;
        end else begin
          exp_rank[k] = -1;
        end
      end
      foreach (seen[s]) exp_count[s] = seen[s];
      exp_v = in_valid; exp_f = in_found; exp_q = in_query;
      @(negedge clk);
      // a random number of held cycles
      advance = 0;
      in_valid = ~in_valid;
      repeat ($urandom_range(1)) @(negedge clk);
      checks++;
      if (out_valid !== exp_v || out_found !== exp_f || out_query !== exp_q) begin
        failures++; $display("FAIL chunk data t=%0d", t);
      end
      for (int k = 0; k < C; k++) begin
        if (exp_rank[k] >= 0) begin
          checks++;
          if (int'(out_rank[k]) != exp_rank[k]) begin
            failures++;
            $display("FAIL t=%0d key %0d rank %0d exp %0d", t, k, out_rank[k], exp_rank[k]);
          end
        end
      end
      for (int s = 0; s < int'(S); s++) begin
        checks++;
        if (int'(out_count[s]) != exp_count[s]) begin
          failures++;
          $display("FAIL t=%0d count[%0d]=%0d exp %0d", t, s, out_count[s], exp_count[s]);
        end
      end
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
