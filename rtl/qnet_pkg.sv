// qnet_pkg: types, constants and sizing functions shared by the instruction
// network of a distributed (multi-node) quantum control system.
//
// The network sends each quantum instruction from one central controller to
// N node controllers that are grouped into M subnets of K = N/M controllers.
// An instruction address is the concatenation {subnet address, node
// controller address}; each half is either an ID (log2 of the count) or a
// bitmap (one bit per subnet / per node controller), which gives the three
// encoding schemes below. The address widths, the extra issue cycles delta,
// the per-opcode issue times and execution times all follow the published
// design; the bit layout of the opcode word is this implementation's choice.
package qnet_pkg;

  // Address encoding scheme: how the subnet and node controller addresses are
  // encoded. (ID, ID) is the single-level SISD baseline and is not offered.
  typedef enum logic [1:0] {
    SUBID_NCBIT  = 2'd0,  // subnet ID,     node controller bitmap
    SUBBIT_NCID  = 2'd1,  // subnet bitmap, node controller ID
    SUBBIT_NCBIT = 2'd2   // subnet bitmap, node controller bitmap
  } enc_scheme_e;

  // Physical instruction set of a node controller. Encoding values are chosen here.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_RX   = 4'd1,
    OP_RY   = 4'd2,
    OP_RZ   = 4'd3,
    OP_CRX  = 4'd4,
    OP_ENT  = 4'd5,
    OP_MEAS = 4'd6
  } opcode_e;

  localparam int PARAM_W    = 16;  // every instruction parameter is a 16-bit word
  localparam int MAX_PARAMS = 3;   // R_X / R_Y carry three parameters
  localparam int QSEL_W     = 2;   // qubit within a node: 0 = electron, 1.. = Carbon-13

  typedef logic [PARAM_W-1:0] param_t;

  // Opcode, target qubit and parameter words of one instruction; the address
  // travels beside it because its width depends on the network parameters.
  typedef struct packed {
    param_t [MAX_PARAMS-1:0] params;
    logic   [QSEL_W-1:0]     qsel;
    opcode_e                 op;
  } inst_body_t;

  // Which hardware of the quantum-classical interface a command is meant for.
  typedef enum logic [1:0] {
    GEN_MW   = 2'd0,  // microwave generator, electron qubit
    GEN_RF   = 2'd1,  // radio-frequency generator, Carbon-13 qubits
    GEN_ENT  = 2'd2,  // remote entanglement hardware
    GEN_MEAS = 2'd3   // electron readout
  } gen_e;

  // Command a node controller hands to its signal generation hardware.
  typedef struct packed {
    logic                valid;  // one-cycle strobe
    gen_e                gen;
    opcode_e             op;
    logic   [QSEL_W-1:0] qsel;
    param_t              angle;  // rotation angle (parameter 0)
    param_t              phase;  // drive phase incl. virtual-Z frame and R_Y quarter turn
    param_t              aux;    // parameter 2, passed through
  } qci_cmd_t;

  // Quarter turn in the 16-bit phase unit (2^16 = one full turn): R_Y = R_X shifted by 90 degrees.
  localparam param_t QUARTER_TURN = 16'h4000;

  // ---- sizing ---------------------------------------------------------------
  function automatic int subnet_addr_bits(enc_scheme_e enc, int m);
    return (enc == SUBID_NCBIT) ? $clog2(m) : m;
  endfunction

  function automatic int nc_addr_bits(enc_scheme_e enc, int k);
    return (enc == SUBBIT_NCID) ? $clog2(k) : k;
  endfunction

  // Address vector width as carried in RTL (at least one bit even for mode (0,0)).
  function automatic int addr_bits(enc_scheme_e enc, int m, int k);
    int w;
    w = subnet_addr_bits(enc, m) + nc_addr_bits(enc, k);
    return (w < 1) ? 1 : w;
  endfunction

  // Number of link words the address occupies: 1 + delta.
  function automatic int addr_words(enc_scheme_e enc, int m, int k, int link_w);
    int w;
    w = subnet_addr_bits(enc, m) + nc_addr_bits(enc, k);
    return (w <= link_w) ? 1 : (w + link_w - 1) / link_w;
  endfunction

  // Parallelization overhead delta (Eq. 1): extra issue cycles over SISD.
  function automatic int delta_cycles(enc_scheme_e enc, int m, int k, int link_w);
    return addr_words(enc, m, k, link_w) - 1;
  endfunction

  // Parallelizability factor rho.
  function automatic int rho(enc_scheme_e enc, int m, int k);
    case (enc)
      SUBID_NCBIT: return k;
      SUBBIT_NCID: return m;
      default:     return m * k;
    endcase
  endfunction

  // 16-bit parameter words per opcode, so that the SISD issue time
  // 2 + nparams matches the issue-time table (R_X 5, R_Z 3, CR_X 4, ...).
  function automatic int nparams(opcode_e op);
    case (op)
      OP_RX, OP_RY: return 3;
      OP_CRX:       return 2;
      OP_RZ, OP_ENT: return 1;
      default:      return 0;
    endcase
  endfunction

  // Issue time in link cycles: opcode word + (1 + delta) address words + parameters.
  function automatic int issue_cycles(opcode_e op, int delta);
    return 2 + delta + nparams(op);
  endfunction

  // Execution time in clock cycles (10 MHz) from the execution-time table.
  function automatic int exec_cycles(opcode_e op);
    case (op)
      OP_RX, OP_RY, OP_CRX: return 62;
      OP_RZ:                return 11;
      OP_ENT:               return 1160;
      OP_MEAS:              return 400;
      default:              return 0;
    endcase
  endfunction

  // Global node controller number of local controller k in subnet s.
  // subBIT_ncID spreads consecutive nodes over subnets (S = node mod M);
  // the other two schemes keep consecutive nodes in one subnet (S = node / K).
  function automatic int node_id(enc_scheme_e enc, int s, int k, int m, int kk);
    return (enc == SUBBIT_NCID) ? (k * m + s) : (s * kk + k);
  endfunction

endpackage
