// tb_bst_accel: end-to-end test of the accelerator at a reduced size, both
// buffer mappings side by side: a 7-level tree with 2 register levels, 4
// subtrees of 5 levels, chunks of 8 keys and 8-entry buffers. Each instance
// loads the tree, checks the latency of a register-layer hit and of a leaf,
// and runs Equal, Random, Split and Mixed key sets with every result checked
// (see bst_accel_checker). It then requires that each mechanism happened:
// stalls, hits in the register layer, hits in the subtrees, misses and
// results on port 2, for each mapping.
module tb_bst_accel;
  import bst_pkg::*;

  localparam int unsigned TL = 7, RL = 2, C = 8, NS = 4, SL = 8, LW = 3, IW = 6;
  localparam int unsigned NK = 2048;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n [2];
  logic [C-1:0]  in_valid [2];
  query_t [C-1:0] in_query [2];
  logic          in_ready [2];
  logic          wr_en [2];
  logic [LW-1:0] wr_level [2];
  logic [IW-1:0] wr_index [2];
  node_t         wr_node [2];
  result_t [C-1:0] reg_res [2];
  result_t [1:0] sub_res [2][NS];
  logic          stall [2];
  logic          done [2];
  int chk [2], fail [2], n_stall [2], n_reg [2], n_sub [2], n_miss [2], n_p2 [2];

  bst_accel #(.TREE_LEVELS(TL), .REG_LEVELS(RL), .CHUNK(C), .SLOTS(SL), .MAPPING(MAP_QUEUE))
  u_queue (.clk, .rst_n(rst_n[0]), .in_valid(in_valid[0]), .in_query(in_query[0]),
           .in_ready(in_ready[0]), .wr_en(wr_en[0]), .wr_level(wr_level[0]),
           .wr_index(wr_index[0]), .wr_node(wr_node[0]), .reg_res(reg_res[0]),
           .sub_res(sub_res[0]), .stall(stall[0]));

  bst_accel #(.TREE_LEVELS(TL), .REG_LEVELS(RL), .CHUNK(C), .SLOTS(SL), .MAPPING(MAP_DIRECT))
  u_direct (.clk, .rst_n(rst_n[1]), .in_valid(in_valid[1]), .in_query(in_query[1]),
            .in_ready(in_ready[1]), .wr_en(wr_en[1]), .wr_level(wr_level[1]),
            .wr_index(wr_index[1]), .wr_node(wr_node[1]), .reg_res(reg_res[1]),
            .sub_res(sub_res[1]), .stall(stall[1]));

  for (genvar d = 0; d < 2; d++) begin : g_chk
    bst_accel_checker #(.NAME(d == 0 ? "queue " : "direct"), .TREE_LEVELS(TL),
                        .REG_LEVELS(RL), .CHUNK(C), .NUM_SUB(NS), .LW(LW), .IW(IW),
                        .NKEYS(NK), .MIXED(1'b1))
    u_chk (.clk, .rst_n(rst_n[d]), .in_valid(in_valid[d]), .in_query(in_query[d]),
           .in_ready(in_ready[d]), .wr_en(wr_en[d]), .wr_level(wr_level[d]),
           .wr_index(wr_index[d]), .wr_node(wr_node[d]), .reg_res(reg_res[d]),
           .sub_res(sub_res[d]), .stall(stall[d]), .done(done[d]), .checks(chk[d]),
           .failures(fail[d]), .n_stall(n_stall[d]), .n_reg_hit(n_reg[d]),
           .n_sub_hit(n_sub[d]), .n_miss(n_miss[d]), .n_port2(n_p2[d]));
  end

  initial begin
    int checks, failures;
    @(posedge clk);
    wait (done[0] && done[1]);
    checks = chk[0] + chk[1];
    failures = fail[0] + fail[1];
    for (int d = 0; d < 2; d++) begin
      $display("%s: stalls=%0d register-layer hits=%0d subtree hits=%0d misses=%0d port-2 results=%0d",
               d == 0 ? "queue " : "direct", n_stall[d], n_reg[d], n_sub[d], n_miss[d], n_p2[d]);
      checks += 5;
      if (n_stall[d] == 0) begin failures++; $display("FAIL no stall"); end
      if (n_reg[d] == 0)   begin failures++; $display("FAIL no register-layer hit"); end
      if (n_sub[d] == 0)   begin failures++; $display("FAIL no subtree hit"); end
      if (n_miss[d] == 0)  begin failures++; $display("FAIL no miss"); end
      if (n_p2[d] == 0)    begin failures++; $display("FAIL port 2 never used"); end
    end
    // queue mapping must not stall more than direct mapping on the same sets
    checks++;
    if (n_stall[0] > n_stall[1]) begin
      failures++; $display("FAIL queue mapping stalled more than direct mapping");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1], fail[0] + fail[1] + 1);
    $finish;
  end
endmodule
