// subtree_labeler: the label stage between the register layer and the
// per-subtree buffers.
//
// For every key of the chunk that still has to be searched in a subtree it
// computes its label, the number of keys before it in the chunk that go to the
// same subtree (the first such key gets 0, the second 1, ...), and for every
// subtree the number of keys going there. A queue-mapped buffer stores a key at
// its write pointer plus the label, so all keys of a chunk can be stored in one
// cycle in chunk order. The count is a prefix sum done as one combinational
// compare-and-count per key, registered in this stage.
//
// Interface and timing: one pipeline stage. in_* is the register layer's
// output; out_* is the same chunk one cycle later, plus out_rank per key and
// out_count per subtree. Keys found in the register layer are passed on with
// out_found=1 and are neither labelled nor counted. advance=0 holds the stage.
// The labelling rule is the paper's; computing it in one registered stage is
// this design's choice (direct mapping ignores the labels but keeps the stage).
module subtree_labeler
  import bst_pkg::*;
#(
  parameter int unsigned CHUNK   = 16,
  parameter int unsigned NUM_SUB = 8,
  parameter int unsigned SW      = (NUM_SUB > 1) ? $clog2(NUM_SUB) : 1,
  parameter int unsigned CW      = $clog2(CHUNK + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               advance,
  input  logic [CHUNK-1:0]   in_valid,
  input  logic [CHUNK-1:0]   in_found,
  input  query_t [CHUNK-1:0] in_query,
  input  val_t [CHUNK-1:0]   in_value,
  input  logic [SW-1:0]      in_sub [CHUNK],
  output logic [CHUNK-1:0]   out_valid,
  output logic [CHUNK-1:0]   out_found,
  output query_t [CHUNK-1:0] out_query,
  output val_t [CHUNK-1:0]   out_value,
  output logic [SW-1:0]      out_sub [CHUNK],
  output logic [CW-1:0]      out_rank [CHUNK],
  output logic [CW-1:0]      out_count [NUM_SUB]
);

  logic [CHUNK-1:0] searching;
  logic [CW-1:0]    rank  [CHUNK];
  logic [CW-1:0]    count [NUM_SUB];

  assign searching = in_valid & ~in_found;

  always_comb begin
    for (int k = 0; k < CHUNK; k++) begin
      rank[k] = '0;
      for (int m = 0; m < k; m++)
        if (searching[m] && in_sub[m] == in_sub[k]) rank[k] = rank[k] + 1'b1;
    end
    for (int s = 0; s < NUM_SUB; s++) begin
      count[s] = '0;
      for (int m = 0; m < CHUNK; m++)
        if (searching[m] && in_sub[m] == SW'(s)) count[s] = count[s] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_found <= '0;
      for (int s = 0; s < NUM_SUB; s++) out_count[s] <= '0;
    end else if (advance) begin
      out_valid <= in_valid;
      out_found <= in_found;
      out_query <= in_query;
      out_value <= in_value;
      out_sub   <= in_sub;
      out_rank  <= rank;
      out_count <= count;
    end
  end

endmodule
