// bram_partition: one BRAM Partition, a true dual-port synchronous RAM of
// tree nodes.
//
// Each level of a subtree lives in its own partition so that all levels can be
// accessed in the same cycle. The two ports (port 1 = a, port 2 = b) are
// independent: each may read or write one node per cycle. A read returns the
// node one cycle after en; a write stores wdata at the clock edge and the same
// port's rdata then shows the old contents (read-first). Both ports writing one
// address in one cycle is not allowed (undefined on an FPGA BRAM as well).
// Dual ports and synchronous access follow the target BRAMs; the read-first
// behaviour and the absence of a reset are this design's choices.
module bram_partition
  import bst_pkg::*;
#(
  parameter int unsigned DEPTH = 1,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  // port 1
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  node_t         a_wdata,
  output node_t         a_rdata,
  // port 2
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  node_t         b_wdata,
  output node_t         b_rdata
);

  node_t mem [DEPTH];

  // One process for both ports, so the array has a single writer.
  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

  a_no_write_clash : assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr))
    else $error("bram_partition: both ports write address %0d", a_addr);

endmodule
