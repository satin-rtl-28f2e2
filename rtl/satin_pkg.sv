// satin_pkg: types and constants shared by the SAT accelerator.
//
// Every network message is one 64-bit flit. Field widths follow the message
// field table of the architecture: header 6, network address 10, clause
// address 10, variable 20, polarity 1, implication level 14, extra bit 1.
// Fields sit at fixed positions so that a router can find the header and the
// network address of any message without knowing its type:
//
//   [63:58] H  = {type[2:0], route[2:0]}
//   [57:48] N  network address      (Reason: upper half of second variable)
//   [47:38] C  clause address       (Reason: lower half of second variable)
//   [37:18] V  variable             (AddClause validate: literal-present mask)
//   [17]    P  polarity (1 = variable true)
//   [16:3]  I  implication level    (AddClause: I[13:11] literal index,
//                                    I[10:9] ac_op_e, I[8:7] connectors {next,prev})
//   [2]     E  extra bit            (Reason: second polarity)
//   [1]     X  context
//   [0]     F  flag: CancelVar = cancel the whole current level,
//                    Strengthen = begin strengthening (copy present bits)
//
// The three route bits are those of the architecture: back to the source
// bank, broadcast, and to the central unit. With all three clear the message
// is unicast to network address N. The context bit, the flag bit and the
// AddClause subfields are this design's own additions in the two spare bits
// and unused fields; the type codes and command codes are also its own.
package satin_pkg;

  localparam int unsigned NADDR_W = 10;   // network address
  localparam int unsigned CADDR_W = 10;   // clause address within a bank
  localparam int unsigned VAR_W   = 20;   // variable index, 2^20 variables
  localparam int unsigned ILVL_W  = 14;   // implication level
  localparam int unsigned NLIT    = 8;    // literals per clause
  localparam int unsigned IDX_W   = $clog2(NLIT);

  typedef logic [VAR_W-1:0]   var_t;
  typedef logic [ILVL_W-1:0]  ilvl_t;
  typedef logic [NADDR_W-1:0] naddr_t;
  typedef logic [CADDR_W-1:0] caddr_t;

  // ---------------------------------------------------------------- messages
  typedef enum logic [2:0] {
    MSG_ADDCLAUSE  = 3'd0,
    MSG_PROPLIT    = 3'd1,
    MSG_CANCELVAR  = 3'd2,
    MSG_COMPLETEDL = 3'd3,
    MSG_CONFLICT   = 3'd4,
    MSG_NOTREASON  = 3'd5,
    MSG_REASON     = 3'd6,
    MSG_STRENGTHEN = 3'd7
  } msg_type_e;

  typedef struct packed {
    logic to_src;     // deliver to the source bank too
    logic bcast;      // broadcast to every node
    logic to_cu;      // deliver to the central unit
  } route_t;

  typedef struct packed {
    msg_type_e  mtype;
    route_t     route;
    naddr_t     n;
    caddr_t     c;
    var_t       v;
    logic       p;
    ilvl_t      i;
    logic       e;
    logic       ctx;
    logic       flag;
  } flit_t;

  // AddClause sub-operations, carried in the I field.
  typedef enum logic [1:0] {
    AC_SETVAR   = 2'd0,   // load literal idx with (V, P)
    AC_VALIDATE = 2'd1,   // mark valid in ctx; V[7:0] = present mask
    AC_CHKRES   = 2'd2    // all clauses of the bank: valid in ctx if valid in any
  } ac_op_e;

  // Router-level flit: the message plus the source node, carried beside it.
  typedef struct packed {
    naddr_t src;
    flit_t  msg;
  } netflit_t;

  // ---------------------------------------------------------------- clause commands
  typedef enum logic [3:0] {
    CMD_NOP         = 4'd0,
    CMD_SETVAR      = 4'd1,
    CMD_VALIDATE    = 4'd2,
    CMD_CHKRES      = 4'd3,
    CMD_PROVAR      = 4'd4,
    CMD_GETPRO      = 4'd5,
    CMD_GETVAR      = 4'd6,
    CMD_CLEARVAR    = 4'd7,
    CMD_COMPLETEDL  = 4'd8,
    CMD_COPYSTR     = 4'd9,
    CMD_STRPROVAR   = 4'd10,
    CMD_STRGETPRO   = 4'd11,
    CMD_CLEARREASON = 4'd12,
    CMD_GETREASON   = 4'd13,
    CMD_GETLVLBITS  = 4'd14
  } ccmd_e;

  // One command, presented to every clause of a bank in the same cycle.
  // Per-clause commands (setvar, validate, getpro, getvar, strgetpro,
  // clearreason, getlvlbits) act only in the clause whose select is high.
  typedef struct packed {
    ccmd_e            op;
    logic             ctx;
    logic [IDX_W-1:0] idx;     // literal index (setvar, getvar)
    var_t             v;       // variable (setvar, provar, clearvar, ...)
    logic             p;       // polarity
    logic [NLIT-1:0]  mask;    // validate: present literals
    logic [1:0]       conn;    // validate: {next, prev} connector present
    logic             allcur;  // clearvar: cancel every current-level literal
  } ccmd_t;

  // Data a selected clause drives onto the bank's shared output bus.
  typedef struct packed {
    var_t             v;
    logic             p;
    logic [IDX_W-1:0] idx;     // index of the literal read out
    logic [NLIT-1:0]  bits;    // getlvlbits: current-level bits
    logic [NLIT-1:0]  present;
  } cdout_t;

  // Depth of an AND tree of the given fan-in over n inputs (at least 1).
  function automatic int unsigned tree_levels(input int unsigned n, input int unsigned fanin);
    int unsigned l, w;
    l = 0;
    w = 1;
    while (w < n) begin
      w = w * fanin;
      l++;
    end
    return (l == 0) ? 1 : l;
  endfunction

endpackage
