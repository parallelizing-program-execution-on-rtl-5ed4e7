// qnet_top: control network of a distributed quantum computer built as a
// two-level hierarchical network. A central controller sends each physical
// instruction over an L-wire network interface; the receiver broadcasts it
// to M subnets. In every subnet a first-level decoder checks the subnet
// address and a second-level decoder the node controller address, so one
// compact address can start the same operation on many node controllers at
// once (parallel execution) while the central controller overlaps the issue
// of instructions to different nodes (pipelined execution) and holds back
// instructions to busy nodes (serial execution).
//
// Defaults: 1024 node controllers (semi-distributed mapping, three qubits per
// node), subID_ncBIT encoding with M = 128 subnets of K = 8 controllers, i.e.
// addressing mode (W_S, W_NC) = (7, 8); with L = 16 wires the 15-bit address
// fits one word, so delta = 0. ENC, N_NODES and N_SUBNETS select any other
// addressing mode of the three schemes.
//
// Node numbering at the ports: node n is the n-th node controller of the
// system. With subBIT_ncID nodes are spread over the subnets (subnet n mod M,
// local index n / M); with the other two schemes node n sits in subnet n / K
// at local index n mod K. The compiler addresses nodes in the same way.
// The RF/MW generators and the qubits are outside: each node's generator
// command leaves on cmd[n], its readout bit enters on meas_bit[n].
//
// The two-level network, the three encoding schemes, the subnet organisation
// per scheme and the 1024-node, 16-wire defaults follow the published design;
// the choice of (7, 8) as the default mode, the port bundle and the single
// receiver that feeds all subnets are this implementation's own.
module qnet_top
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC        = SUBID_NCBIT,
  parameter int          N_NODES    = 1024,
  parameter int          N_SUBNETS  = 128,
  parameter int          LINK_W     = 16,
  parameter int          FIFO_DEPTH = 16,
  parameter int          N_QUBITS   = 3,
  localparam int         M          = N_SUBNETS,
  localparam int         K          = N_NODES / N_SUBNETS,
  localparam int         AW         = addr_bits(ENC, M, K)
) (
  input  logic              clk,
  input  logic              rst_n,
  // compiled instruction stream from the host
  input  logic              in_valid,
  output logic              in_ready,
  input  inst_body_t        in_inst,
  input  logic [AW-1:0]     in_addr,
  // per-node quantum-classical interface (index = node number)
  output qci_cmd_t          cmd [N_NODES],
  input  logic [N_NODES-1:0] meas_bit,
  output logic [N_NODES-1:0] node_busy,
  output logic [N_NODES-1:0] node_done,
  // results and status
  output logic [N_NODES-1:0] meas_result,
  output logic [N_NODES-1:0] meas_seen,
  output logic              idle,
  output logic [31:0]       issued,
  output logic [31:0]       stall_cycles,
  // network interface wires, for observation
  output logic              link_valid,
  output logic [LINK_W-1:0] link_data
);

  // Network-internal vectors are indexed s*K + k.
  logic [M*K-1:0] busy_i, done_i, rv_i, rb_i, meas_i, res_i, seen_i;
  qci_cmd_t       cmd_i [M*K];
  logic           bc_valid;
  inst_body_t     bc_inst;
  logic [AW-1:0]  bc_addr;

  central_controller #(.ENC(ENC), .M(M), .K(K), .LINK_W(LINK_W), .FIFO_DEPTH(FIFO_DEPTH)) u_cc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_inst, .in_addr,
    .link_valid, .link_data,
    .nc_busy(busy_i), .nc_res_valid(rv_i), .nc_res_bit(rb_i),
    .meas_result(res_i), .meas_seen(seen_i), .idle, .issued, .stall_cycles
  );

  ni_rx #(.AW(AW), .LINK_W(LINK_W)) u_rx (
    .clk, .rst_n, .link_valid, .link_data,
    .inst_valid(bc_valid), .inst(bc_inst), .inst_addr(bc_addr)
  );

  for (genvar s = 0; s < M; s++) begin : g_subnet
    subnet #(.ENC(ENC), .M(M), .K(K), .SUB_IDX(s), .N_QUBITS(N_QUBITS)) u_subnet (
      .clk, .rst_n,
      .inst_valid(bc_valid), .inst(bc_inst), .inst_addr(bc_addr),
      .busy(busy_i[s*K +: K]), .done(done_i[s*K +: K]),
      .res_valid(rv_i[s*K +: K]), .res_bit(rb_i[s*K +: K]),
      .cmd(cmd_i[s*K : s*K+K-1]), .meas_bit(meas_i[s*K +: K])
    );
    // map network position (s, k) to node number
    for (genvar k = 0; k < K; k++) begin : g_map
      localparam int NID = node_id(ENC, s, k, M, K);
      assign cmd[NID]         = cmd_i[s*K + k];
      assign meas_i[s*K + k]  = meas_bit[NID];
      assign node_busy[NID]   = busy_i[s*K + k];
      assign node_done[NID]   = done_i[s*K + k];
      assign meas_result[NID] = res_i[s*K + k];
      assign meas_seen[NID]   = seen_i[s*K + k];
    end
  end

  initial begin
    assert (N_NODES % N_SUBNETS == 0) else $error("qnet_top: N_NODES must be a multiple of N_SUBNETS");
  end

endmodule
