// bst_pkg: types shared by the hybrid binary-search-tree accelerator.
//
// A tree node is a 32-bit key with a 32-bit value, the node format of the
// accelerator. A query is a key plus a tag chosen by the sender; the tag comes
// back with the result so results can be matched to keys even though keys
// found at different depths leave the accelerator in a different order. The
// tag width is this design's choice.
package bst_pkg;

  localparam int unsigned KEY_W = 32;
  localparam int unsigned VAL_W = 32;
  localparam int unsigned TAG_W = 24;

  typedef logic [KEY_W-1:0] key_t;
  typedef logic [VAL_W-1:0] val_t;
  typedef logic [TAG_W-1:0] tag_t;

  // One tree node, <K,V>.
  typedef struct packed {
    key_t key;
    val_t value;
  } node_t;

  // A key to be searched, with the sender's tag.
  typedef struct packed {
    key_t key;
    tag_t tag;
  } query_t;

  // One search result. found=0 means the key is not in the tree.
  typedef struct packed {
    logic   valid;
    logic   found;
    query_t query;
    val_t   value;
  } result_t;

  // How keys are placed into the per-subtree buffers.
  typedef enum logic {
    MAP_DIRECT = 1'b0,  // slot = key's position in its chunk
    MAP_QUEUE  = 1'b1   // slot = write pointer + label
  } map_mode_e;

endpackage
