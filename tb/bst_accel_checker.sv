// bst_accel_checker: stimulus and checking for a bst_accel instance, shared by
// the end-to-end and full-size testbenches.
//
// It resets the accelerator, loads a complete tree whose node of in-order
// position p holds key 2p+2 and value 7*key+1 (node i of level j of an L-level
// tree has in-order position (2i+1)*2^(L-1-j)-1), then runs key sets, one after
// the other, each of NKEYS keys in chunks:
//   Equal  - every key is the same leaf key (worst case, one subtree),
//   Random - keys of uniformly random nodes,
//   Split  - key k of a chunk is a random leaf of subtree k mod NUM_SUB
//            (best case, every subtree gets two keys per chunk),
// (each at NKEYS keys, then again at NKEYS2 keys if that is not 0)
//   Mixed  - (if MIXED, NKEYS keys) random keys over the whole key range, odd ones absent,
//            plus keys of the register-held nodes.
// Every result is checked against the formula above by its tag, and every key
// must come back exactly once. It measures cycles from the first accepted
// chunk to the last result and reports keys per cycle, also as a ratio to
// 2 keys/cycle (a single dual-port horizontal pipeline). It probes one lone
// key to check the pipeline latency, and counts stalls, register-layer hits,
// subtree hits, misses and port-2 results. done rises when all is finished.
module bst_accel_checker
  import bst_pkg::*;
#(
  parameter string       NAME        = "dut",
  parameter int unsigned TREE_LEVELS = 20,
  parameter int unsigned REG_LEVELS  = 3,
  parameter int unsigned CHUNK       = 16,
  parameter int unsigned NUM_SUB     = 8,
  parameter int unsigned LW          = 5,
  parameter int unsigned IW          = 19,
  parameter int unsigned NKEYS       = 1024,
  parameter int unsigned NKEYS2      = 0,      // second size of the sets, 0 = none
  parameter bit          MIXED       = 1'b0
) (
  input  logic                clk,
  output logic                rst_n,
  output logic [CHUNK-1:0]    in_valid,
  output query_t [CHUNK-1:0]  in_query,
  input  logic                in_ready,
  output logic                wr_en,
  output logic [LW-1:0]       wr_level,
  output logic [IW-1:0]       wr_index,
  output node_t               wr_node,
  input  result_t [CHUNK-1:0] reg_res,
  input  result_t [1:0]       sub_res [NUM_SUB],
  input  logic                stall,
  output logic                done,
  output int                  checks,
  output int                  failures,
  output int                  n_stall,
  output int                  n_reg_hit,
  output int                  n_sub_hit,
  output int                  n_miss,
  output int                  n_port2
);

  localparam int unsigned SUB_LEVELS = TREE_LEVELS - REG_LEVELS;
  localparam int unsigned NNODES     = (1 << TREE_LEVELS) - 1;

  function automatic key_t key_of(int unsigned j, int unsigned i);
    return key_t'(2 * ((2 * i + 1) * (1 << (TREE_LEVELS - 1 - j)) - 1) + 2);
  endfunction
  function automatic val_t val_of(key_t k);
    return 32'd7 * k + 32'd1;
  endfunction
  function automatic bit in_tree(key_t k);
    return (k[0] == 1'b0) && k >= 2 && k <= 2 * NNODES;
  endfunction

  key_t keys [];     // key sent with tag t
  bit   seen [];
  int   got, cycle;
  bit   counting;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (counting && stall) n_stall <= n_stall + 1;
  end

  task automatic check_res(result_t r, bit from_reg);
    int t;
    if (!r.valid) return;
    checks++;
    t = int'(r.query.tag);
    if (t >= keys.size() || seen[t] || r.query.key !== keys[t] ||
        r.found !== in_tree(keys[t]) || (r.found && r.value !== val_of(keys[t]))) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: tag %0d key %0d found=%0d value=%0d", NAME, t, r.query.key,
                 r.found, r.value);
    end else begin
      seen[t] = 1'b1;
    end
    got++;
    if (from_reg) n_reg_hit++;
    else if (r.found) n_sub_hit++;
    if (!r.found) n_miss++;
  endtask

  always @(negedge clk) begin
    for (int k = 0; k < int'(CHUNK); k++) check_res(reg_res[k], 1'b1);
    for (int s = 0; s < int'(NUM_SUB); s++) begin
      check_res(sub_res[s][0], 1'b0);
      check_res(sub_res[s][1], 1'b0);
      if (sub_res[s][1].valid) n_port2++;
    end
  end

  // A random leaf key of subtree s.
  function automatic key_t leaf_of_sub(int unsigned s);
    int unsigned per = 1 << (SUB_LEVELS - 1);
    return key_of(TREE_LEVELS - 1, s * per + $urandom_range(per - 1));
  endfunction

  // Drive keys[0..n-1] in chunks, wait for all results, return the cycles.
  task automatic run_set(string set, int n);
    int start, fin, sent, stalls0;
    real kpc;
    got = 0;
    seen = new[n];
    stalls0 = n_stall;
    sent = 0;
    counting = 1'b1;
    start = -1;
    while (sent < n) begin
      for (int k = 0; k < int'(CHUNK); k++) begin
        in_valid[k] = (sent + k < n);
        in_query[k].key = (sent + k < n) ? keys[sent + k] : '0;
        in_query[k].tag = tag_t'(sent + k);
      end
      @(posedge clk);
      if (in_ready) begin
        if (start < 0) start = cycle;
        sent += CHUNK;
      end
      #1;
    end
    in_valid = '0;
    while (got < n && cycle - start < 64 * n + 1000) @(posedge clk);
    fin = cycle;
    #1;
    counting = 1'b0;
    checks++;
    if (got != n) begin
      failures++;
      $display("FAIL %s %s: %0d of %0d results", NAME, set, got, n);
    end
    kpc = real'(n) / real'(fin - start);
    $display("%s %-6s %0d keys: %0d cycles, %0.2f keys/cycle, %0.2fx of 2 keys/cycle, %0d stall cycles",
             NAME, set, n, fin - start, kpc, kpc / 2.0, n_stall - stalls0);
    // Shape of the rates: no stall for Split, Equal limited to one subtree.
    if (set == "Split") begin
      checks++;
      if (n_stall != stalls0 || fin - start > n / int'(CHUNK) + int'(TREE_LEVELS) + 8) begin
        failures++; $display("FAIL %s Split: stalled or slower than one chunk per cycle", NAME);
      end
    end
    if (set == "Equal") begin
      checks++;
      if (kpc > 2.05 || n_stall == stalls0) begin
        failures++; $display("FAIL %s Equal: faster than two keys per cycle or no stall", NAME);
      end
    end
  endtask

  initial begin
    int lat;
    done = 0; checks = 0; failures = 0; n_stall = 0; n_reg_hit = 0; n_sub_hit = 0;
    n_miss = 0; n_port2 = 0; cycle = 0; counting = 0; got = 0;
    rst_n = 0; in_valid = '0; in_query = '0;
    wr_en = 0; wr_level = '0; wr_index = '0; wr_node = '0;
    keys = new[1];
    seen = new[1];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // load the tree
    for (int j = 0; j < int'(TREE_LEVELS); j++)
      for (int i = 0; i < (1 << j); i++) begin
        wr_en = 1; wr_level = LW'(j); wr_index = IW'(i);
        wr_node.key = key_of(j, i); wr_node.value = val_of(key_of(j, i));
        @(posedge clk); #1;
      end
    wr_en = 0;
    // latency probes: a register-layer hit (the root) and a leaf
    for (int p = 0; p < 2; p++) begin
      int t0;
      keys[0] = (p == 0) ? key_of(0, 0) : key_of(TREE_LEVELS - 1, 0);
      seen = new[1]; got = 0;
      in_valid = '0; in_valid[0] = 1'b1; in_query[0].key = keys[0]; in_query[0].tag = '0;
      @(posedge clk); t0 = cycle; #1 in_valid = '0;
      while (got == 0 && cycle - t0 < 100) @(posedge clk);
      lat = cycle - t0;
      checks++;
      if (lat != ((p == 0) ? int'(REG_LEVELS) + 2 : int'(REG_LEVELS + SUB_LEVELS) + 3)) begin
        failures++; $display("FAIL %s latency probe %0d: %0d cycles", NAME, p, lat);
      end
      $display("%s latency of a %s: %0d cycles", NAME, (p == 0) ? "register-layer hit" : "leaf", lat);
      repeat (2) @(posedge clk); #1;
    end
    for (int sz = 0; sz < 2; sz++) begin
      int n;
      key_t k0;
      n = (sz == 0) ? int'(NKEYS) : int'(NKEYS2);
      if (n == 0) continue;
      keys = new[n];
      k0 = key_of(TREE_LEVELS - 1, $urandom_range((1 << (TREE_LEVELS - 1)) - 1));
      foreach (keys[t]) keys[t] = k0;
      run_set("Equal", n);
      foreach (keys[t]) keys[t] = key_t'(2 * $urandom_range(NNODES - 1) + 2);
      run_set("Random", n);
      foreach (keys[t]) keys[t] = leaf_of_sub(t % NUM_SUB);
      run_set("Split", n);
    end
    if (MIXED) begin
      keys = new[NKEYS];
      foreach (keys[t])
        keys[t] = ($urandom_range(3) == 0) ?
                  key_of(0, 0) + key_t'(2 * $urandom_range((1 << REG_LEVELS) - 1)) -
                  key_t'(2 * $urandom_range((1 << REG_LEVELS) - 1)) :
                  key_t'($urandom_range(2 * NNODES + 3));
      // make sure every register node is searched
      for (int j = 0; j < int'(REG_LEVELS); j++)
        for (int i = 0; i < (1 << j); i++) keys[(1 << j) + i] = key_of(j, i);
      run_set("Mixed", NKEYS);
    end
    done = 1;
  end

endmodule
