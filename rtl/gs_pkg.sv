// gs_pkg: types and constants shared by the GraphScale graph processor.
//
// Every value the datapath carries (vertex identifier, pointer, vertex label)
// is a 32-bit unsigned word, as in the evaluated BFS and WCC configurations.
// A memory line is 512 bits, i.e. 16 words; 16 is also the number of
// neighbours a graph core takes per cycle and the number of label scratch pad
// banks (e = 16). Memory addresses in requests are line addresses.
// The request/response structs describe one memory channel: reads are tagged
// with the requesting client so responses can be routed back, writes carry a
// per-word enable mask. Line size, the client tag and the mask are choices of
// this implementation; the 32-bit word and e = 16 follow the paper.
package gs_pkg;

  localparam int unsigned WORD_W     = 32;
  localparam int unsigned LINE_WORDS = 16;               // e: words per line = banks
  localparam int unsigned LINE_W     = WORD_W * LINE_WORDS;
  localparam int unsigned LANE_W     = $clog2(LINE_WORDS);
  localparam int unsigned ADDR_W     = 32;               // line address width
  localparam int unsigned CLIENT_W   = 3;                // read client tag width

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LINE_WORDS-1:0] lmask_t;

  localparam word_t LABEL_INF = '1;                      // "unvisited" / identity of min

  // Map UDF selection; both use the minimum reduce UDF.
  typedef enum logic [0:0] { ALG_BFS = 1'b0, ALG_WCC = 1'b1 } algo_e;

  typedef struct packed {
    logic [ADDR_W-1:0]   line;
    logic [CLIENT_W-1:0] client;
  } rd_req_t;

  typedef struct packed {
    logic [LINE_W-1:0]   data;
    logic [CLIENT_W-1:0] client;
  } rd_resp_t;

  typedef struct packed {
    logic [ADDR_W-1:0] line;
    logic [LINE_W-1:0] data;
    lmask_t            mask;
  } wr_req_t;

  // Parameters of one graph core for one meta-partition (word / vertex units).
  typedef struct packed {
    logic [ADDR_W-1:0] labels_line;   // first line of this core's vertex label array
    logic [ADDR_W-1:0] ptr_line;      // first line of the partition's pointers array
    logic [ADDR_W-1:0] nbr_line;      // first line of the partition's neighbours array
    word_t             num_vertices;  // |I_q|, vertices of this core's interval
    word_t             num_edges;     // neighbours in this partition
    word_t             sub_base;      // first local vertex of the prefetched sub-interval
    word_t             sub_size;      // vertices in the sub-interval
  } core_cfg_t;

  // One reduced (vertex, label) pair inside the accumulator.
  typedef struct packed {
    logic  v;        // pair present
    word_t id;       // source vertex (local index)
    word_t label;    // candidate label
    logic  upd;      // some contributing edge improved the label
    logic  same;     // merged signal: whole span carries the same id
  } pair_t;

endpackage
