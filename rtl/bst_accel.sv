// bst_accel: hybrid (horizontal + vertical) partitioned binary search tree
// lookup accelerator.
//
// The complete tree of TREE_LEVELS levels is cut in two layers. The top
// REG_LEVELS levels sit in registers (register_layer), where a whole chunk of
// CHUNK keys is compared at once. Below them the tree is split vertically into
// NUM_SUB = 2^REG_LEVELS subtrees, and each subtree horizontally, one
// dual-port BRAM Partition per level (subtree_pipeline), so every subtree
// starts two searches per cycle. Between the layers a label stage
// (subtree_labeler) and one buffer per subtree absorb the uneven spread of a
// chunk over the subtrees: queue_buffer (MAPPING = MAP_QUEUE, default) or
// direct_buffer (MAP_DIRECT). When any buffer cannot take the keys the current
// chunk sends to it, the register layer and the label stage stall and
// in_ready drops; the subtrees never stop and keep draining the buffers. With
// keys spread evenly over the subtrees the accelerator accepts a chunk of
// 2*NUM_SUB keys every cycle; when all keys go to one subtree it falls to two
// keys per cycle.
//
// Interface: a chunk in_valid/in_query is taken at a clock edge where
// in_ready=1. Results carry the key's tag. Counting the accepting clock edge
// as edge 0 and with no stall, a key found in the register layer is on
// reg_res (lane = its position in the chunk) after edge REG_LEVELS+1; any
// other key is on sub_res[s][port] of its subtree s after edge
// REG_LEVELS+SUB_LEVELS+2 plus the cycles it waited in the buffer (22 edges
// at the default size). Results are not back-pressured. The
// tree is loaded through wr_en/wr_level/wr_index/wr_node (node wr_index of
// level wr_level of the whole tree, children of i at 2i and 2i+1), one node per
// cycle, before searching; stall shows a stalled cycle. rst_n is synchronous,
// active low, and clears the pipelines and buffers but not the tree.
//
// The layer split, the subtree rule, buffers, labels and both mappings follow
// the paper; the load port, the tagged result lanes and the reset are this
// design's own.
module bst_accel
  import bst_pkg::*;
#(
  parameter int unsigned TREE_LEVELS = 20,
  parameter int unsigned REG_LEVELS  = 3,
  parameter int unsigned CHUNK       = 2 << REG_LEVELS,
  parameter int unsigned SLOTS       = 16,
  parameter map_mode_e   MAPPING     = MAP_QUEUE,
  // derived
  parameter int unsigned NUM_SUB     = 1 << REG_LEVELS,
  parameter int unsigned SUB_LEVELS  = TREE_LEVELS - REG_LEVELS,
  parameter int unsigned LW          = $clog2(TREE_LEVELS),
  parameter int unsigned IW          = TREE_LEVELS - 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // key chunks
  input  logic [CHUNK-1:0]    in_valid,
  input  query_t [CHUNK-1:0]  in_query,
  output logic                in_ready,
  // tree load
  input  logic                wr_en,
  input  logic [LW-1:0]       wr_level,
  input  logic [IW-1:0]       wr_index,
  input  node_t               wr_node,
  // results
  output result_t [CHUNK-1:0] reg_res,
  output result_t [1:0]       sub_res [NUM_SUB],
  output logic                stall
);

  localparam int unsigned SW  = REG_LEVELS;
  localparam int unsigned CW  = $clog2(CHUNK + 1);
  localparam int unsigned SLW = (SUB_LEVELS > 1) ? $clog2(SUB_LEVELS) : 1;
  localparam int unsigned SWIW = (SUB_LEVELS > 1) ? SUB_LEVELS - 1 : 1;

  // ---------------------------------------------------------------- load
  logic                  wr_reg;
  logic [REG_LEVELS-1:0] wr_reg_addr;
  logic [SLW-1:0]        wr_sub_level;
  logic [SW-1:0]         wr_sub;
  logic [SWIW-1:0]       wr_sub_index;

  always_comb begin
    int unsigned lvl;
    lvl          = 32'(wr_level) - REG_LEVELS;
    wr_reg       = (32'(wr_level) < REG_LEVELS);
    wr_reg_addr  = REG_LEVELS'((32'd1 << wr_level) + 32'(wr_index));
    wr_sub_level = SLW'(lvl);
    wr_sub       = SW'(32'(wr_index) >> lvl);
    wr_sub_index = SWIW'(32'(wr_index) & ((32'd1 << lvl) - 1));
  end

  // ------------------------------------------------------ register layer
  logic             advance;
  logic [CHUNK-1:0] rl_valid, rl_found;
  query_t [CHUNK-1:0] rl_query;
  val_t [CHUNK-1:0] rl_value;
  logic [SW-1:0]    rl_sub [CHUNK];

  assign advance  = !stall;
  assign in_ready = advance;

  register_layer #(.REG_LEVELS(REG_LEVELS), .CHUNK(CHUNK)) u_regs (
    .clk      (clk),
    .rst_n    (rst_n),
    .advance  (advance),
    .in_valid (in_valid),
    .in_query (in_query),
    .wr_en    (wr_en && wr_reg),
    .wr_addr  (wr_reg_addr),
    .wr_node  (wr_node),
    .out_valid(rl_valid),
    .out_found(rl_found),
    .out_query(rl_query),
    .out_value(rl_value),
    .out_sub  (rl_sub)
  );

  // --------------------------------------------------------- label stage
  logic [CHUNK-1:0]   lb_valid, lb_found;
  query_t [CHUNK-1:0] lb_query;
  val_t [CHUNK-1:0]   lb_value;
  logic [SW-1:0]      lb_sub   [CHUNK];
  logic [CW-1:0]      lb_rank  [CHUNK];
  logic [CW-1:0]      lb_count [NUM_SUB];

  subtree_labeler #(.CHUNK(CHUNK), .NUM_SUB(NUM_SUB), .SW(SW), .CW(CW)) u_label (
    .clk      (clk),
    .rst_n    (rst_n),
    .advance  (advance),
    .in_valid (rl_valid),
    .in_found (rl_found),
    .in_query (rl_query),
    .in_value (rl_value),
    .in_sub   (rl_sub),
    .out_valid(lb_valid),
    .out_found(lb_found),
    .out_query(lb_query),
    .out_value(lb_value),
    .out_sub  (lb_sub),
    .out_rank (lb_rank),
    .out_count(lb_count)
  );

  // Keys found in the register layer leave when their chunk moves on.
  always_ff @(posedge clk) begin
    for (int k = 0; k < CHUNK; k++) begin
      if (!rst_n) begin
        reg_res[k] <= '0;
      end else begin
        reg_res[k].valid <= advance && lb_valid[k] && lb_found[k];
        reg_res[k].found <= 1'b1;
        reg_res[k].query <= lb_query[k];
        reg_res[k].value <= lb_value[k];
      end
    end
  end

  // ------------------------------------------- buffers and subtree layer
  logic [NUM_SUB-1:0] conflict;

  assign stall = |conflict;

  for (genvar s = 0; s < NUM_SUB; s++) begin : g_sub
    logic [CHUNK-1:0] to_here;
    logic [1:0]       bq_valid;
    query_t [1:0]     bq_query;

    for (genvar k = 0; k < CHUNK; k++) begin : g_sel
      assign to_here[k] = lb_valid[k] && !lb_found[k] && (lb_sub[k] == SW'(s));
    end

    if (MAPPING == MAP_QUEUE) begin : g_queue
      queue_buffer #(.CHUNK(CHUNK), .SLOTS(SLOTS), .CW(CW)) u_buf (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (to_here),
        .in_query (lb_query),
        .in_rank  (lb_rank),
        .in_count (lb_count[s]),
        .push     (advance),
        .conflict (conflict[s]),
        .out_valid(bq_valid),
        .out_query(bq_query)
      );
    end else begin : g_direct
      direct_buffer #(.CHUNK(CHUNK), .SLOTS(SLOTS)) u_buf (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (to_here),
        .in_query (lb_query),
        .push     (advance),
        .conflict (conflict[s]),
        .out_valid(bq_valid),
        .out_query(bq_query)
      );
    end

    subtree_pipeline #(.SUB_LEVELS(SUB_LEVELS), .LW(SLW), .IW(SUB_LEVELS), .WIW(SWIW)) u_tree (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_valid(bq_valid),
      .in_query(bq_query),
      .wr_en   (wr_en && !wr_reg && (wr_sub == SW'(s))),
      .wr_level(wr_sub_level),
      .wr_index(wr_sub_index),
      .wr_node (wr_node),
      .res     (sub_res[s])
    );
  end

  // Direct mapping needs one slot per chunk position.
  if (MAPPING == MAP_DIRECT && SLOTS != CHUNK) begin : g_bad_slots
    $error("bst_accel: direct mapping needs SLOTS == CHUNK");
  end

endmodule
