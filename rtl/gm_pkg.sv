// gm_pkg: sizes and data types shared by every GraphMatch module.
//
// All values in the data graph (vertex identifiers, CSR pointers) are 32-bit
// unsigned integers, and a memory line is 512 bits, i.e. 16 elements; both
// numbers follow the prototype.  Addresses handed between modules are element
// addresses (one element = 4 bytes); the memory port itself is line addressed.
// A matching carries up to MAX_LEVELS = 6 vertices, the maximum query size of
// the prototype, each with its identifier and the neighbourhood metadata
// (left bound into the neighbour array, neighbourhood size) that the
// extenders need.  The field widths of the configuration records and the
// end-of-stream marker in a matching are choices of this implementation.
package gm_pkg;

  localparam int unsigned VID_W      = 32;              // vertex ids and pointers
  localparam int unsigned LINE_ELEMS = 16;              // elements per memory line
  localparam int unsigned LINE_W     = VID_W * LINE_ELEMS; // 512-bit memory interface
  localparam int unsigned EADDR_W    = 32;              // element address width
  localparam int unsigned LADDR_W    = EADDR_W - 4;     // line address width
  localparam int unsigned MAX_LEVELS = 6;               // vertices per matching
  localparam int unsigned MAX_SETS   = 4;               // input sets per intersector
  localparam int unsigned POS_W      = 3;               // index of a matching vertex
  localparam int unsigned MINSZ_W    = 8;               // failing-set-pruning threshold

  typedef logic [VID_W-1:0]   vid_t;
  typedef logic [EADDR_W-1:0] eaddr_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [POS_W-1:0]   pos_t;

  // Request for one input set: 'count' consecutive elements from 'addr'.
  typedef struct packed {
    eaddr_t addr;
    vid_t   count;
  } set_req_t;

  // One memory line of a set as it leaves a fetcher.  'mask' marks the
  // elements that belong to the set, 'last' the final line of the set.  An
  // empty set is a single line with an all-zero mask and 'last' set.
  typedef struct packed {
    logic [LINE_ELEMS-1:0][VID_W-1:0] data;
    logic [LINE_ELEMS-1:0]            mask;
    logic                             last;
  } fline_t;

  // A line together with the maximum of its valid elements (line maxer output).
  typedef struct packed {
    fline_t line;
    vid_t   max;
  } mline_t;

  // One beat of an intersection result: an element, or the terminator that
  // closes the result set (is_elem = 0, last = 1).
  typedef struct packed {
    vid_t elem;
    logic is_elem;
    logic last;
  } res_beat_t;

  typedef struct packed {
    vid_t id;
    vid_t left;   // pointer to the first neighbour
    vid_t size;   // neighbourhood size
  } vertex_t;

  // Partial matching.  'n' vertices are valid (v[0] .. v[n-1]).  A matching
  // with 'eos' set carries no vertices: it marks the end of the stream of a
  // query and travels in order behind every real matching.
  typedef struct packed {
    vertex_t [MAX_LEVELS-1:0] v;
    logic [POS_W-1:0]         n;
    logic                     eos;
  } matching_t;

  // ---------------- query parameters ----------------
  typedef struct packed {
    logic                                  on;         // filter enabled
    logic [MAX_LEVELS-1:0]                 size_mask;  // vertices whose size is checked
    logic [MAX_LEVELS-1:0][MINSZ_W-1:0]    min_size;   // required size (>=1 checks empty)
    logic                                  distinct;   // isomorphism: newest vertex distinct
  } filter_cfg_t;

  typedef struct packed {
    logic   en;        // fetch metadata at all
    pos_t   pos;       // matching vertex whose pointers are fetched
    eaddr_t ptr_base;  // pointer array (outgoing or incoming)
  } ptr_cfg_t;

  typedef struct packed {
    logic [2:0]                  nsets;     // 2 .. MAX_SETS
    pos_t   [MAX_SETS-1:0]       pos;       // matching vertex feeding each spot
    eaddr_t [MAX_SETS-1:0]       nbr_base;  // neighbour array of each spot
  } isect_cfg_t;

  typedef struct packed {
    ptr_cfg_t    ptr;
    filter_cfg_t f1;
    isect_cfg_t  isect;
    filter_cfg_t f2;
  } ext_cfg_t;

  typedef struct packed {
    eaddr_t ptr_base;  // outgoing pointers
    eaddr_t nbr_base;  // outgoing neighbours
    vid_t   v_begin;   // vertex interval [v_begin, v_end) of this instance
    vid_t   v_end;
  } src_cfg_t;

  typedef struct packed {
    src_cfg_t                     src;
    filter_cfg_t                  f0;
    ext_cfg_t [MAX_LEVELS-3:0]    ext;
    logic [POS_W-1:0]             query_size;  // 3 .. MAX_LEVELS vertices
    eaddr_t                       match_base;  // matchings array (line aligned)
  } inst_cfg_t;

  localparam int unsigned INST_CFG_W = $bits(inst_cfg_t);

  // ---------------- memory port ----------------
  typedef struct packed {
    logic                  we;
    laddr_t                addr;
    logic [LINE_W-1:0]     wdata;
    logic [LINE_ELEMS-1:0] wmask;  // element write enables
  } mem_req_t;

  typedef logic [LINE_W-1:0] line_data_t;

endpackage
