// lambda_pkg: types and constants shared by every block of the lambda-calculus
// work cluster.
//
// A work cluster is a fixed pool of nodes. Each node holds exactly one lambda
// expression (Undefined, GoTo, Name, Application or Function) and talks to its
// parent and two children over two buses per direction:
//   * the expression bus carries {Resolve Flag, expression type, child-left
//     pointer, child-right pointer}. A Name keeps its value in the two pointer
//     fields, read together as one 2*ID_W-bit number.
//   * the instruction bus carries {instruction, Unique Node ID}. ID 0 means
//     "no node"/NULL.
// Bus names and field names follow the mnemonics of the original design
// (PEB/PIB parent buses, CLE/CLI and CRE/CRI child buses, RSF, EXR, CLP,
// CRP, UNI). An all-zero bus is the "empty" bus.
//
// The numeric encodings of the expression types and instructions are this
// design's own choice; the original only says the expression type is a 3-bit
// value.
package lambda_pkg;

  // Nodes per work cluster (16 in the original implementation).
  localparam int unsigned NODES_DEFAULT = 16;

  // Expression type, 3 bits.
  typedef enum logic [2:0] {
    EXP_UNDEF = 3'd0,
    EXP_GOTO  = 3'd1,
    EXP_NAME  = 3'd2,
    EXP_APP   = 3'd3,
    EXP_FUNC  = 3'd4
  } exp_t;

  // Instructions carried on an instruction bus.
  typedef enum logic [3:0] {
    INS_NONE       = 4'd0,
    INS_MARK       = 4'd1,   // descendant marker
    INS_NULLIFY    = 4'd2,   // Alg 1
    INS_UPDATE_EXP = 4'd3,   // Alg 2
    INS_UPDATE_CL  = 4'd4,   // Alg 3/4 (left pointer)
    INS_UPDATE_CR  = 4'd5,   // Alg 3/4 (right pointer)
    INS_RETURN_EXP = 4'd6,   // Alg 5
    INS_BRANCH_CHOP= 4'd7,   // Alg 6 (descendant instruction)
    INS_GOTO_CHOP  = 4'd8,   // Alg 7 (descendant instruction)
    INS_IMMED_RES  = 4'd9,   // Alg 9
    INS_ANC_XFORM  = 4'd10,  // Alg 10
    INS_COMPARE    = 4'd11,  // Alg 11
    INS_DESC_XFORM = 4'd12   // Alg 12
  } ins_t;

  // Width of a Unique Node ID. ID 0 is NULL, so a cluster holds at most
  // 2**ID_W - 1 nodes.
  localparam int unsigned ID_W = 5;

  typedef logic [ID_W-1:0] uid_t;

  // Expression bus (PEB, CLE, CRE).
  typedef struct packed {
    logic rsf;
    exp_t exr;
    uid_t clp;
    uid_t crp;
  } ebus_t;

  // Instruction bus (PIB, CLI, CRI).
  typedef struct packed {
    ins_t ins;
    uid_t uni;
  } ibus_t;

  // One word of the program RAM: write expression `e` into node `uni`.
  typedef struct packed {
    uid_t  uni;
    ebus_t e;
  } prog_word_t;

  // Everything a node receives from its parent and its two children. Besides
  // the two buses of Table 2 each link carries the Irreducible Flag downward
  // and the child's Resolve Flag upward as plain wires.
  typedef struct packed {
    ebus_t peb;
    ibus_t pib;
    logic  irf;
    ebus_t cle;
    ibus_t cli;
    logic  rsf_cl;
    ebus_t cre;
    ibus_t cri;
    logic  rsf_cr;
  } node_in_t;

  // Everything a node drives towards its parent and its two children, plus
  // the pointer information the selector layer needs to route the buses.
  typedef struct packed {
    ebus_t peb;
    ibus_t pib;
    logic  rsf;
    ebus_t cle;
    ibus_t cli;
    logic  irf_cl;
    ebus_t cre;
    ibus_t cri;
    logic  irf_cr;
    logic  clp_valid;
    logic  crp_valid;
    uid_t  clp;
    uid_t  crp;
  } node_out_t;

  // Number of children an expression type has: the amount by which the front
  // stack pointer grows when a node of this type is queried (Alg 8).
  function automatic logic [1:0] n_children(exp_t e);
    case (e)
      EXP_APP, EXP_FUNC: return 2'd2;
      EXP_GOTO:          return 2'd1;
      default:           return 2'd0;
    endcase
  endfunction

endpackage
