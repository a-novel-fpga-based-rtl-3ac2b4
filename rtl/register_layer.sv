// register_layer: the top REG_LEVELS levels of the tree, held in registers and
// searched by a whole chunk of keys at once.
//
// Registers have no port limit, so all CHUNK keys of a chunk compare against a
// level in the same cycle. The layer is a pipeline of REG_LEVELS stages, one
// per tree level: the stage for level r compares each key with the node on its
// path (equal: found, larger: right child, smaller: left child) and registers
// the outcome. After the last level a key that was not found carries the
// number of the subtree it continues in: 2*i+1 if it is larger than last-level
// node i, else 2*i. With REG_LEVELS=3 there are 7 register nodes and 8
// subtrees.
//
// Interface: in_valid/in_query is a chunk of CHUNK lanes; per lane, out_* is
// the same key REG_LEVELS cycles later (when advance was 1 in each of those
// cycles), with out_found/out_value for a hit and out_sub for the subtree.
// advance=0 freezes every stage (the stall). The nodes are kept in heap order
// (1 = root, children of n at 2n and 2n+1) and are written through wr_*; they
// are not reset.
//
// Follows the paper: register-held first levels read in parallel, the
// left/right subtree rule, the stall of the layer. This design's own choices:
// one stage per level, heap-order storage, the load port.
module register_layer
  import bst_pkg::*;
#(
  parameter int unsigned REG_LEVELS = 3,
  parameter int unsigned CHUNK      = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  advance,
  input  logic [CHUNK-1:0]      in_valid,
  input  query_t [CHUNK-1:0]    in_query,
  input  logic                  wr_en,
  input  logic [REG_LEVELS-1:0] wr_addr,
  input  node_t                 wr_node,
  output logic [CHUNK-1:0]      out_valid,
  output logic [CHUNK-1:0]      out_found,
  output query_t [CHUNK-1:0]    out_query,
  output val_t [CHUNK-1:0]      out_value,
  output logic [REG_LEVELS-1:0] out_sub [CHUNK]
);

  localparam int unsigned NREG = (1 << REG_LEVELS);  // heap slots 1..NREG-1 used

  typedef struct packed {
    logic                  valid;
    logic                  found;
    query_t                query;
    val_t                  value;
    logic [REG_LEVELS-1:0] idx;   // index within the level
  } lane_t;

  node_t nodes [NREG];
  lane_t stg_in  [REG_LEVELS][CHUNK];
  lane_t stg_out [REG_LEVELS][CHUNK];
  lane_t stg_q   [REG_LEVELS][CHUNK];

  always_ff @(posedge clk) begin
    if (wr_en) nodes[wr_addr] <= wr_node;
  end

  for (genvar r = 0; r < REG_LEVELS; r++) begin : g_lvl
    for (genvar k = 0; k < CHUNK; k++) begin : g_key
      if (r == 0) begin : g_first
        always_comb begin
          stg_in[r][k]       = '0;
          stg_in[r][k].valid = in_valid[k];
          stg_in[r][k].query = in_query[k];
        end
      end else begin : g_next
        assign stg_in[r][k] = stg_q[r-1][k];
      end

      // Compare with the node of level r on this key's path.
      always_comb begin
        node_t nd;
        nd = nodes[(1 << r) + 32'(stg_in[r][k].idx)];
        stg_out[r][k] = stg_in[r][k];
        if (stg_in[r][k].valid && !stg_in[r][k].found) begin
          if (stg_in[r][k].query.key == nd.key) begin
            stg_out[r][k].found = 1'b1;
            stg_out[r][k].value = nd.value;
          end else begin
            stg_out[r][k].idx = (stg_in[r][k].idx << 1) |
                                REG_LEVELS'(stg_in[r][k].query.key > nd.key);
          end
        end
      end

      always_ff @(posedge clk) begin
        if (!rst_n)       stg_q[r][k].valid <= 1'b0;
        else if (advance) stg_q[r][k]       <= stg_out[r][k];
      end
    end
  end

  for (genvar k = 0; k < CHUNK; k++) begin : g_out
    assign out_valid[k] = stg_q[REG_LEVELS-1][k].valid;
    assign out_found[k] = stg_q[REG_LEVELS-1][k].found;
    assign out_query[k] = stg_q[REG_LEVELS-1][k].query;
    assign out_value[k] = stg_q[REG_LEVELS-1][k].value;
    assign out_sub[k]   = stg_q[REG_LEVELS-1][k].idx;
  end

endmodule
