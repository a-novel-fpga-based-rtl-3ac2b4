// direct_buffer: direct-mapped buffer in front of one subtree.
//
// The buffer has one slot per position of a chunk (SLOTS = CHUNK). Key k of an
// accepted chunk that goes to this subtree is written into slot k, with no
// search for a free slot. The lower half of the slots feeds port 1 of the
// subtree and the upper half port 2; each cycle each port takes the occupied
// slot with the lowest index in its half, so one key per half leaves per cycle.
// If a key's slot is still occupied and is not being emptied in this cycle,
// conflict is raised and the whole chunk waits (the register layer stalls),
// even when other slots are free: the weakness of this mapping.
//
// Interface and timing: in_valid[k]/in_query[k] offer key k of the chunk at
// the head of the label stage; conflict is combinational from them and the
// buffer state; push=1 stores all offered keys at the clock edge (the caller
// pushes only when no buffer of the accelerator is in conflict). out_valid[p]/
// out_query[p] is the key read for port p in this cycle; it is removed at the
// clock edge. A key can leave the cycle after it was stored. Slot mapping, the
// two halves and the lowest-slot-first choice follow the paper; treating a slot
// emptied in the same cycle as free is this design's choice.
module direct_buffer
  import bst_pkg::*;
#(
  parameter int unsigned CHUNK = 16,
  parameter int unsigned SLOTS = CHUNK
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [CHUNK-1:0]   in_valid,
  input  query_t [CHUNK-1:0] in_query,
  input  logic               push,
  output logic               conflict,
  output logic [1:0]         out_valid,
  output query_t [1:0]       out_query
);

  localparam int unsigned HALF = SLOTS / 2;

  logic [SLOTS-1:0] occ;
  query_t           slot [SLOTS];
  logic [SLOTS-1:0] deq;   // slots read out this cycle

  // Each port takes the lowest occupied slot of its half.
  always_comb begin
    deq       = '0;
    out_valid = '0;
    out_query = '0;
    for (int p = 0; p < 2; p++) begin
      for (int i = 0; i < int'(HALF); i++) begin
        if (occ[p * HALF + i] && !out_valid[p]) begin
          out_valid[p]          = 1'b1;
          out_query[p]          = slot[p * HALF + i];
          deq[p * HALF + i]     = 1'b1;
        end
      end
    end
  end

  assign conflict = |(in_valid & occ & ~deq);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      occ <= '0;
    end else begin
      occ <= (occ & ~deq) | (push ? in_valid : '0);
      for (int k = 0; k < CHUNK; k++)
        if (push && in_valid[k]) slot[k] <= in_query[k];
    end
  end

  a_no_overwrite : assert property (@(posedge clk) disable iff (!rst_n)
    push |-> !conflict)
    else $error("direct_buffer: chunk pushed over an occupied slot");

endmodule
