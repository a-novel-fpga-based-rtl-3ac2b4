// subtree_pipeline: one subtree of the tree, searched by a two-lane pipeline
// with one BRAM Partition per level (horizontal partitioning).
//
// Level j of the subtree (2^j nodes) is stored in its own dual-port
// bram_partition, so every level can serve two keys per cycle: lane 0 uses
// port 1, lane 1 uses port 2. A key entering a lane reads the subtree root; in
// the next cycle its node arrives and is compared: equal means found (the
// node's value is kept), a larger key goes to the right child and a smaller one
// to the left, and the child's address is sent to the next level's partition
// in the same cycle. Node i of level j has its children at 2i and 2i+1 of
// level j+1 (complete tree). A new key may enter each lane every cycle, so up
// to 2*SUB_LEVELS keys are in flight and the subtree delivers up to two
// results per cycle.
//
// Timing: the result of a key presented at cycle t leaves on res at cycle
// t+SUB_LEVELS+1 on the same lane. A key found above the leaves keeps moving
// down with its result (its later reads are skipped), so results leave in the
// order keys entered. A key that matches no node on its path leaves with
// found=0.
//
// Loading: wr_en writes wr_node at node wr_index of level wr_level through
// port 1 of that level, taking precedence over a lane-0 read there; loading is
// meant to be done before searching.
//
// Follows the paper: level-per-partition storage, dual ports, one level per
// cycle, the compare rule. This design's own choices: the implicit child
// addressing, carrying found keys to the end, the load port.
module subtree_pipeline
  import bst_pkg::*;
#(
  parameter int unsigned SUB_LEVELS = 17,
  parameter int unsigned LW = (SUB_LEVELS > 1) ? $clog2(SUB_LEVELS) : 1,
  parameter int unsigned IW = SUB_LEVELS,
  parameter int unsigned WIW = (SUB_LEVELS > 1) ? SUB_LEVELS - 1 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [1:0]    in_valid,
  input  query_t [1:0]  in_query,
  input  logic          wr_en,
  input  logic [LW-1:0] wr_level,
  input  logic [WIW-1:0] wr_index,
  input  node_t         wr_node,
  output result_t [1:0] res
);

  typedef struct packed {
    logic          valid;
    logic          found;
    query_t        query;
    val_t          value;
    logic [IW-1:0] idx;    // node index within the current level
  } lane_t;

  lane_t st_in [SUB_LEVELS+1][2];  // lane entering level j (combinational)
  lane_t st_q  [SUB_LEVELS][2];    // lane registered at level j
  node_t rd    [SUB_LEVELS][2];    // node read at level j

  for (genvar l = 0; l < 2; l++) begin : g_entry
    always_comb begin
      st_in[0][l]       = '0;
      st_in[0][l].valid = in_valid[l];
      st_in[0][l].query = in_query[l];
    end
  end

  for (genvar j = 0; j < SUB_LEVELS; j++) begin : g_level
    localparam int unsigned DEPTH = 1 << j;
    localparam int unsigned AW    = (j > 0) ? j : 1;

    logic          wr_here;
    logic [1:0]    rd_en;
    logic [AW-1:0] addr [2];

    assign wr_here = wr_en && (wr_level == LW'(j));

    for (genvar l = 0; l < 2; l++) begin : g_lane
      assign rd_en[l] = st_in[j][l].valid && !st_in[j][l].found;
      assign addr[l]  = AW'(st_in[j][l].idx);
    end

    bram_partition #(.DEPTH(DEPTH), .AW(AW)) u_part (
      .clk    (clk),
      .a_en   (rd_en[0] || wr_here),
      .a_we   (wr_here),
      .a_addr (wr_here ? AW'(wr_index) : addr[0]),
      .a_wdata(wr_node),
      .a_rdata(rd[j][0]),
      .b_en   (rd_en[1]),
      .b_we   (1'b0),
      .b_addr (addr[1]),
      .b_wdata('0),
      .b_rdata(rd[j][1])
    );

    for (genvar l = 0; l < 2; l++) begin : g_cmp
      always_ff @(posedge clk) begin
        if (!rst_n) st_q[j][l].valid <= 1'b0;
        else        st_q[j][l]       <= st_in[j][l];
      end

      // Compare with the node just read and steer to the child.
      always_comb begin
        st_in[j+1][l] = st_q[j][l];
        if (st_q[j][l].valid && !st_q[j][l].found) begin
          if (st_q[j][l].query.key == rd[j][l].key) begin
            st_in[j+1][l].found = 1'b1;
            st_in[j+1][l].value = rd[j][l].value;
          end else begin
            st_in[j+1][l].idx = {st_q[j][l].idx[IW-2:0],
                                 (st_q[j][l].query.key > rd[j][l].key)};
          end
        end
      end
    end
  end

  for (genvar l = 0; l < 2; l++) begin : g_out
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        res[l] <= '0;
      end else begin
        res[l].valid <= st_in[SUB_LEVELS][l].valid;
        res[l].found <= st_in[SUB_LEVELS][l].found;
        res[l].query <= st_in[SUB_LEVELS][l].query;
        res[l].value <= st_in[SUB_LEVELS][l].found ? st_in[SUB_LEVELS][l].value : '0;
      end
    end
  end

endmodule
