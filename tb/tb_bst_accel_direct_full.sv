// tb_bst_accel_direct_full: the accelerator at its default size (a 2^20-1 node tree,
// 3 register levels, 8 subtrees of 17 BRAM levels, chunks of 16 keys, 16-entry
// queue-mapped buffers). It loads the whole tree, checks the latency of a
// register-layer hit and of a leaf, and runs the Equal, Random and Split key
// sets of 64K and then 256K keys each, checking every result (see bst_accel_checker) and
// reporting keys per cycle.
module tb_bst_accel_direct_full;
  import bst_pkg::*;

  localparam int unsigned TL = 20, RL = 3, C = 16, NS = 8, LW = 5, IW = 19;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_ready, wr_en, stall, done;
  logic [C-1:0] in_valid;
  query_t [C-1:0] in_query;
  logic [LW-1:0] wr_level;
  logic [IW-1:0] wr_index;
  node_t wr_node;
  result_t [C-1:0] reg_res;
  result_t [1:0] sub_res [NS];
  int checks, failures, n_stall, n_reg, n_sub, n_miss, n_p2;

  bst_accel #(.MAPPING(MAP_DIRECT)) dut (.*);

  bst_accel_checker #(.NAME("direct"), .TREE_LEVELS(TL), .REG_LEVELS(RL), .CHUNK(C),
                      .NUM_SUB(NS), .LW(LW), .IW(IW), .NKEYS(65536), .NKEYS2(262144), .MIXED(1'b0))
  u_chk (.clk, .rst_n, .in_valid, .in_query, .in_ready, .wr_en, .wr_level, .wr_index,
         .wr_node, .reg_res, .sub_res, .stall, .done, .checks, .failures, .n_stall,
         .n_reg_hit(n_reg), .n_sub_hit(n_sub), .n_miss(n_miss), .n_port2(n_p2));

  initial begin
    @(posedge clk);
    wait (done);
    $display("direct: stalls=%0d subtree hits=%0d port-2 results=%0d", n_stall, n_sub, n_p2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
