// fv_pkg: types and constants shared by the Farview node.
//
// Farview is a network-attached DRAM buffer pool whose read path runs query
// operators (projection, selection, grouping, decryption) as the data streams
// from memory to the network. This package holds the word and tuple formats,
// the request formats used between the stacks and the parameter block a
// Farview request carries. Widths follow the paper where it states them
// (64-byte network/channel words, 8-byte attributes, 2 MB pages); the field
// layout of the request parameters is this design's own choice.
package fv_pkg;

  // 64-byte words: channel controller width and network datapath width.
  localparam int unsigned WORD_W   = 512;
  localparam int unsigned WORD_B   = WORD_W / 8;        // 64 bytes
  // Pipeline tuple: 8 attributes of 8 bytes (the paper's base table format).
  localparam int unsigned COL_W    = 64;
  localparam int unsigned NCOL     = WORD_W / COL_W;     // 8
  // Tuples of up to 8 words (512 bytes, the largest tuple the paper uses).
  localparam int unsigned MAX_TW   = 8;
  localparam int unsigned MAX_TCOL = MAX_TW * NCOL;      // 64 attributes
  // Addresses and 2 MB pages.
  localparam int unsigned VA_W     = 48;
  localparam int unsigned PA_W     = 36;                 // 64 GB of on-board DRAM
  localparam int unsigned PAGE_B   = 21;                 // log2(2 MB)
  localparam int unsigned LEN_W    = 32;

  typedef logic [WORD_W-1:0]         word_t;
  typedef logic [NCOL-1:0][COL_W-1:0] tuple_t;

  // One item of the operator pipeline: a tuple of up to 8 attributes with
  // its annotation (which slots hold projected attributes), a keep flag
  // (cleared by filters and for end-of-stream markers without data) and the
  // end-of-stream flag.
  typedef struct packed {
    tuple_t           col;
    logic [NCOL-1:0]  ann;
    logic             keep;
    logic             last;
  } titem_t;

  // Memory request as issued by a dynamic region (virtual) or by the MMU
  // (physical). Addresses and lengths are multiples of 64 bytes.
  typedef struct packed {
    logic [VA_W-1:0]  addr;
    logic [LEN_W-1:0] len;      // bytes
    logic             wr;
  } mem_req_t;

  // Request to one memory channel, in channel words (64 bytes each).
  typedef struct packed {
    logic [PA_W-7:0]  waddr;    // channel-local word address
    logic [LEN_W-7:0] nwords;
    logic             wr;
  } ch_req_t;

  // Predicate comparison operators and attribute types.
  typedef enum logic [2:0] {
    CMP_LT = 3'd0, CMP_LE = 3'd1, CMP_GT = 3'd2, CMP_GE = 3'd3,
    CMP_EQ = 3'd4, CMP_NE = 3'd5, CMP_TRUE = 3'd6
  } cmp_op_e;

  typedef enum logic [1:0] {
    TY_UINT = 2'd0, TY_INT = 2'd1, TY_DOUBLE = 2'd2
  } col_type_e;

  typedef struct packed {
    logic [2:0]       col;      // pipeline slot compared
    cmp_op_e          op;
    col_type_e        ty;
    logic [COL_W-1:0] value;
  } pred_t;

  localparam int unsigned NPRED = 2;

  typedef enum logic [1:0] {
    GRP_NONE = 2'd0, GRP_DISTINCT = 2'd1, GRP_GROUPBY = 2'd2, GRP_AGGREGATE = 2'd3
  } grp_mode_e;

  // Parameters of one Farview request (the "farView(qp, ft, params)" verb).
  typedef struct packed {
    logic [VA_W-1:0]            vaddr;       // table start (virtual)
    logic [LEN_W-1:0]           len;         // table bytes
    logic [3:0]                 tuple_words; // 1..8 words of 64 bytes per tuple
    logic                       sa_en;       // smart addressing
    logic                       vec_en;      // vectorized selection lanes
    logic [MAX_TCOL-1:0]        proj_mask;   // attributes kept
    logic [NPRED-1:0]           pred_en;
    logic [NPRED-1:0][$bits(pred_t)-1:0] pred;
    logic                       dec_en;
    logic [127:0]               aes_key;
    logic [127:0]               aes_iv;
    grp_mode_e                  grp_mode;
    logic [NCOL-1:0]            key_mask;    // grouping attributes (first two used)
    logic [2:0]                 agg_col;     // aggregated attribute
    logic [63:0]                client_vaddr;// result buffer at the client
  } fv_params_t;

  // Aggregation result carried with a group.
  typedef struct packed {
    logic [31:0] count;
    logic [63:0] sum;
    logic [63:0] min;
    logic [63:0] max;
  } agg_t;

  // RDMA command from a region's sender to the network stack.
  typedef struct packed {
    logic [63:0]      vaddr;    // remote (client) address
    logic [LEN_W-1:0] len;      // bytes
    logic             last;     // last packet of the response
    logic             rd_resp;  // answers a plain RDMA read
  } rdma_cmd_t;

  // Request arriving from the network stack for a queue pair.
  typedef enum logic [1:0] {
    OP_READ = 2'd0, OP_WRITE = 2'd1, OP_FARVIEW = 2'd2
  } net_op_e;

  typedef struct packed {
    net_op_e          op;
    logic [23:0]      qpn;
    logic [VA_W-1:0]  vaddr;        // plain read / write: memory address
    logic [LEN_W-1:0] len;
    logic [63:0]      client_vaddr; // plain read: where the data goes
    fv_params_t       fv;           // Farview request parameters
  } net_req_t;

  // Order-preserving key for comparisons of the three attribute types.
  function automatic logic [COL_W:0] ordkey(logic [COL_W-1:0] v, col_type_e ty);
    logic [COL_W:0] k;
    unique case (ty)
      TY_INT:    k = {1'b0, ~v[COL_W-1], v[COL_W-2:0]};
      TY_DOUBLE: k = v[COL_W-1] ? {1'b0, ~v} : {1'b0, 1'b1, v[COL_W-2:0]};
      default:   k = {1'b0, v};
    endcase
    return k;
  endfunction

  function automatic logic cmp_eval(logic [COL_W-1:0] a, logic [COL_W-1:0] b,
                                    cmp_op_e op, col_type_e ty);
    logic [COL_W:0] ka, kb;
    ka = ordkey(a, ty);
    kb = ordkey(b, ty);
    unique case (op)
      CMP_LT:  return ka <  kb;
      CMP_LE:  return ka <= kb;
      CMP_GT:  return ka >  kb;
      CMP_GE:  return ka >= kb;
      CMP_EQ:  return ka == kb;
      CMP_NE:  return ka != kb;
      default: return 1'b1;
    endcase
  endfunction

endpackage
