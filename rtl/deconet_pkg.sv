// deconet_pkg: types and constants shared by every block of the decoding network.
//
// Messages between nodes use one fixed 64-bit word: an 8-bit destination node, an 8-bit
// header and a 48-bit payload (destination 0 is the root, leaves are numbered from 1).
// The field split follows the published message format; the header codes, the payload
// layouts and the decoder-array types below are this design's own choices.
package deconet_pkg;

  // ---------------------------------------------------------------- messages
  localparam int DEST_W = 8;
  localparam int HDR_W  = 8;
  localparam int PAY_W  = 48;

  typedef struct packed {
    logic [DEST_W-1:0] dest;
    logic [HDR_W-1:0]  hdr;
    logic [PAY_W-1:0]  payload;
  } msg_t;

  localparam logic [DEST_W-1:0] ROOT_ID = 8'd0;

  // Header codes.
  //  H_SET_BOUNDARY  payload[7:0] face index, payload[9:8] face_e
  //  H_DECODE        payload[15:0] block index
  //  H_SET_ROUTE     payload[7:0] measurement channel, payload[15:8] decoder instance
  //  H_BDRY_DEFECTS  payload[31:0] toggle chunk, [35:32] chunk index, [47:36] block index
  //  H_RESULT        payload[7:0] logical qubit, [23:8] block index, [24] logical flip
  localparam logic [HDR_W-1:0] H_NOP          = 8'h00;
  localparam logic [HDR_W-1:0] H_SET_BOUNDARY = 8'h01;
  localparam logic [HDR_W-1:0] H_DECODE       = 8'h02;
  localparam logic [HDR_W-1:0] H_SET_ROUTE    = 8'h03;
  localparam logic [HDR_W-1:0] H_BDRY_DEFECTS = 8'h10;
  localparam logic [HDR_W-1:0] H_RESULT       = 8'h20;

  localparam int CHUNK_W = 32;

  // ---------------------------------------------------------------- boundaries
  // State of one face between two decoding blocks that sit side by side.
  //  F_SPLIT   the two logical qubits are separate: each side sees a real boundary
  //  F_MERGED  merged, both blocks in the same leaf: fused by Fusion Union-Find
  //  F_OPEN    merged across leaves, this side decodes first: the face acts as a boundary
  //            and the corrections that cross it are sent to the neighbour leaf
  //  F_CLOSED  merged across leaves, this side decodes later: the face has no edges and
  //            the neighbour's corrections arrive as defect toggles
  typedef enum logic [1:0] {F_SPLIT = 2'd0, F_MERGED = 2'd1, F_OPEN = 2'd2, F_CLOSED = 2'd3} face_e;

  // ---------------------------------------------------------------- Union-Find array
  localparam int ID_W   = 16;   // cluster id; 0 is the virtual boundary vertex
  localparam int DIST_W = 16;   // hop distance to the cluster root in the spanning tree

  typedef enum logic [1:0] {E_ABSENT = 2'd0, E_NORMAL = 2'd1, E_BOUND = 2'd2, E_ART = 2'd3} edge_e;

  // Direction of a vertex's parent in the spanning tree of its cluster.
  typedef enum logic [2:0] {P_NONE = 3'd0, P_W = 3'd1, P_E = 3'd2, P_N = 3'd3,
                            P_S = 3'd4, P_D = 3'd5, P_U = 3'd6} pdir_e;

  // Command broadcast by the coordinator to all decoder instances of a leaf.
  typedef enum logic [3:0] {
    C_NONE      = 4'd0,
    C_SHIFT     = 4'd1,   // previous <- current block, current <- next buffered block
    C_COMMIT    = 4'd2,   // latch the time-face corrections of the committed block
    C_MRG_INIT  = 4'd3,   // every vertex takes its own id
    C_MRG       = 4'd4,   // min-id flooding over fully grown edges
    C_TREE_INIT = 4'd5,
    C_TREE      = 4'd6,   // hop distances and parents: spanning tree of each cluster
    C_PAR_INIT  = 4'd7,
    C_PAR       = 4'd8,   // defect parity gathered from the leaves of the tree to its root
    C_BC_INIT   = 4'd9,
    C_BC        = 4'd10,  // cluster parity sent back from the root to every vertex
    C_GROW      = 4'd11   // odd clusters grow every incident edge by half an edge
  } uf_cmd_e;

  // What a decoder instance shows its neighbour about one vertex on a shared face.
  typedef struct packed {
    logic              act;    // vertex exists (seam vertices only while merged)
    logic [ID_W-1:0]   id;
    logic [DIST_W-1:0] hops;
    logic              par_x;  // its tree parent lies across the face
    logic              sub;    // gathered defect parity of its subtree
    logic              odd;    // its cluster is odd
    logic              efull;  // the face edge (owned by the right-hand block) is fully grown
  } face_vtx_t;

  // ---------------------------------------------------------------- root program
  // One instruction of the logical-level processor.
  //  OP_SEND    send `msg`
  //  OP_WAIT    wait until the result of logical qubit `q` for block msg.payload[15:0] is in
  //  OP_SENDIF  send `msg` only if the latest result of qubit `q` equals `val`
  //  OP_END     stop
  typedef enum logic [1:0] {OP_SEND = 2'd0, OP_WAIT = 2'd1, OP_SENDIF = 2'd2, OP_END = 2'd3} lp_op_e;

  typedef struct packed {
    lp_op_e     op;
    logic [7:0] q;
    logic       val;
    msg_t       msg;
  } lp_instr_t;

endpackage
