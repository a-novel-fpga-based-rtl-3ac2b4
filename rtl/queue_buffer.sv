// queue_buffer: queue-mapped buffer in front of one subtree.
//
// The buffer is a circular queue of SLOTS entries with its own read pointer
// (oldest key, next to be searched) and write pointer (first free entry). Each
// key of an accepted chunk that goes to this subtree arrives with its label,
// the number of earlier keys of the chunk going to the same subtree, and is
// written at write pointer + label, so all of them are stored in one cycle, in
// chunk order, in consecutive entries. Every cycle up to two keys leave from
// the read pointer: the first to port 1 of the subtree, the second to port 2.
// Keys therefore reach the subtree in the order they entered the accelerator.
// conflict is raised when more keys arrive than the buffer has free entries;
// the chunk then waits while the buffer keeps draining.
//
// Interface and timing: in_valid/in_query/in_rank give the keys of the chunk
// at the head of the label stage that go here and in_count how many they are;
// conflict is combinational; push=1 stores them at the clock edge. out_valid/
// out_query are this cycle's reads, removed at the clock edge; a key can leave
// the cycle after it was stored. An occupancy counter tells a full queue from
// an empty one. SLOTS must be a power of two (pointers wrap by overflow).
// Pointers, labels and the stall rule follow the paper; counting entries read
// in the same cycle as free and the counter are this design's choices.
module queue_buffer
  import bst_pkg::*;
#(
  parameter int unsigned CHUNK = 16,
  parameter int unsigned SLOTS = 16,
  parameter int unsigned CW    = $clog2(CHUNK + 1),
  parameter int unsigned PW    = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  parameter int unsigned NW    = $clog2(SLOTS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [CHUNK-1:0]   in_valid,
  input  query_t [CHUNK-1:0] in_query,
  input  logic [CW-1:0]      in_rank [CHUNK],
  input  logic [CW-1:0]      in_count,
  input  logic               push,
  output logic               conflict,
  output logic [1:0]         out_valid,
  output query_t [1:0]       out_query
);

  query_t        slot [SLOTS];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [NW-1:0] used;
  logic [NW-1:0] n_deq;
  logic [NW:0]   n_free;

  assign out_valid[0] = (used >= NW'(1));
  assign out_valid[1] = (used >= NW'(2));
  assign out_query[0] = slot[rd_ptr];
  assign out_query[1] = slot[rd_ptr + PW'(1)];
  assign n_deq        = NW'(out_valid[0]) + NW'(out_valid[1]);
  assign n_free       = (NW+1)'(SLOTS) - (NW+1)'(used) + (NW+1)'(n_deq);
  assign conflict     = ((NW+1)'(in_count) > n_free);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      used   <= '0;
    end else begin
      rd_ptr <= rd_ptr + PW'(n_deq);
      if (push) begin
        wr_ptr <= wr_ptr + PW'(in_count);
        used   <= used - n_deq + NW'(in_count);
        for (int k = 0; k < CHUNK; k++)
          if (in_valid[k]) slot[wr_ptr + PW'(in_rank[k])] <= in_query[k];
      end else begin
        used   <= used - n_deq;
      end
    end
  end

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    push |-> !conflict)
    else $error("queue_buffer: chunk pushed into a full queue");
  a_used_bound : assert property (@(posedge clk) disable iff (!rst_n)
    used <= NW'(SLOTS))
    else $error("queue_buffer: occupancy above SLOTS");

endmodule
