// sihgnn_pkg: types and constants shared by the SiHGNN frontend.
//
// The frontend has two halves. The Semantic Graph Builder keeps a Callback
// Trie Tree (CTT) of every metapath already built and splits a new metapath
// into the longest reusable pieces. The Graph Restructurer finds a maximum
// matching of a bipartite semantic graph, selects a backbone from it and
// re-emits the edges as three subgraphs.
//
// Sizes that follow the paper: four vertex types per dataset (every dataset
// evaluated has four), metapaths of up to nine hops, a 5 KB CTT buffer.
// Everything else (pointer widths, the node word layout, vertex and edge
// counts of the restructurer) is this design's own choice. Not every module
// uses every constant, so a linter run on a single module lists the rest as
// unused.
package sihgnn_pkg;

  // ---------------------------------------------------------------- builder
  localparam int NUM_TYPES  = 4;                    // vertex types per dataset
  localparam int TYPE_W     = $clog2(NUM_TYPES);
  localparam int MAX_HOPS   = 9;                    // longest metapath evaluated
  localparam int MAX_LEN    = MAX_HOPS + 1;         // types in a metapath
  localparam int LEN_W      = $clog2(MAX_LEN + 1);
  localparam int CTT_PTR_W  = 11;
  // 5 KB / 26-bit node word = 1575 words; rounded down to whole child blocks.
  localparam int CTT_DEPTH  = 1572;

  typedef logic [TYPE_W-1:0]    vtype_t;
  typedef logic [CTT_PTR_W-1:0] ctt_ptr_t;
  typedef logic [LEN_W-1:0]     len_t;

  // One CTT node. next_p points at the child block of the node (NUM_TYPES
  // consecutive words, slot = child type); 0 means "no children", because
  // block 0 is the level-1 block and is nobody's child.
  typedef struct packed {
    logic     valid;
    logic     is_sg;        // a semantic graph exists for root..this node
    vtype_t   data;         // vertex type of this node
    ctt_ptr_t next_p;       // Next P.
    ctt_ptr_t callback_p;   // Callback P. (level-1 node of the same type)
  } ctt_node_t;

  // One element of a generation list: the stored semantic graph whose
  // metapath ends at CTT node sg_node covers candidate types first..last.
  typedef struct packed {
    ctt_ptr_t sg_node;
    len_t     first;
    len_t     last;
  } gen_elem_t;

  // ------------------------------------------------------------ restructurer
  localparam int DEF_V_W = 14;   // up to 16384 vertices on each side
  localparam int DEF_E_W = 16;   // up to 65536 edges per semantic graph

  // Subgraph produced by the Graph Generator.
  typedef enum logic [1:0] {
    SUB_SRCIN_DSTOUT = 2'd0,     // Src_in  -> Dst_out
    SUB_SRCOUT_DSTIN = 2'd1,     // Src_out -> Dst_in
    SUB_REST         = 2'd2      // Src_in -> Dst_in and any other edge
  } subgraph_e;

endpackage
