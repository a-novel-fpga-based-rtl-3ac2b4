// tb_register_layer: self-checking test of the register-held top levels.
// The three register levels hold the top 7 nodes of a 6-level complete tree
// with in-order keys 2,4,...,126. Random chunks of 16 keys enter while advance
// is randomly dropped; each chunk must come out after exactly three advancing
// cycles with, per key, the hit (key and value) or the subtree number that a
// plain software walk of the tree gives, and must be held while advance=0.
module tb_register_layer;
  import bst_pkg::*;

  localparam int unsigned R = 3;
  localparam int unsigned C = 16;
  localparam int unsigned TL = 6;           // levels of the whole tree
  localparam int unsigned N  = (1 << TL) - 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, advance, wr_en;
  logic [C-1:0] in_valid, out_valid, out_found;
  query_t [C-1:0] in_query, out_query;
  val_t [C-1:0] out_value;
  logic [R-1:0] wr_addr;
  node_t wr_node;
  logic [R-1:0] out_sub [C];

  int checks = 0, failures = 0, hits = 0, misses = 0, holds = 0;

  register_layer #(.REG_LEVELS(R), .CHUNK(C)) dut (.*);

  function automatic int unsigned key_of(int unsigned j, int unsigned i);
    return 2 * ((2 * i + 1) * (1 << (TL - 1 - j)) - 1) + 2;
  endfunction

  typedef struct {
    logic [C-1:0] v;
    query_t       q [C];
  } chunk_t;
  chunk_t sent [$];

  task automatic check_chunk(chunk_t c);
    for (int k = 0; k < C; k++) begin
      int unsigned idx = 0;
      bit f = 0;
      for (int r = 0; r < int'(R); r++) begin
        int unsigned nk = key_of(r, idx);
        if (!f) begin
          if (c.q[k].key == nk) f = 1;
          else idx = 2 * idx + ((c.q[k].key > nk) ? 1 : 0);
        end
      end
      checks++;
      if (out_valid[k] !== c.v[k] || (c.v[k] && (out_query[k] !== c.q[k] ||
          out_found[k] !== f || (f && out_value[k] !== c.q[k].key + 32'd5) ||
          (!f && out_sub[k] !== R'(idx))))) begin
        failures++;
        $display("FAIL key %0d lane %0d: v=%0d f=%0d sub=%0d exp v=%0d f=%0d sub=%0d",
                 c.q[k].key, k, out_valid[k], out_found[k], out_sub[k], c.v[k], f, idx);
      end
      if (c.v[k]) begin
        if (f) hits++; else misses++;
      end
    end
  endtask

  initial begin
    rst_n = 0; advance = 0; wr_en = 0; in_valid = '0; in_query = '0; wr_addr = '0;
    wr_node = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < int'(R); j++)
      for (int i = 0; i < (1 << j); i++) begin
        wr_en = 1; wr_addr = R'((1 << j) + i);
        wr_node.key = key_of(j, i); wr_node.value = key_of(j, i) + 5;
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      chunk_t c;
      logic [C-1:0] pv;
      query_t [C-1:0] pq;
      advance = ($urandom_range(3) != 0);
      for (int k = 0; k < C; k++) begin
        c.v[k] = ($urandom_range(7) != 0);
        c.q[k].key = $urandom_range(2 * N + 2);
        c.q[k].tag = tag_t'($urandom);
        in_valid[k] = c.v[k];
        in_query[k] = c.q[k];
      end
      pv = out_valid; pq = out_query;
      @(negedge clk);
      if (advance) begin
        sent.push_back(c);
        if (sent.size() > R) void'(sent.pop_front());
        if (sent.size() == R) check_chunk(sent[0]);
      end else if (t > 10) begin
        holds++;
        checks++;
        if (out_valid !== pv || out_query !== pq) begin
          failures++; $display("FAIL output moved while advance=0");
        end
      end
    end
    checks++;
    if (hits == 0 || misses == 0 || holds == 0) begin
      failures++; $display("FAIL coverage hits=%0d misses=%0d holds=%0d", hits, misses, holds);
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
