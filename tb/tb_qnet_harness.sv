// tb_qnet_harness: end-to-end test sequence for one configuration of
// qnet_top, used by tb_qnet_top (three reduced configurations) and
// tb_qnet_top_full (the default configuration). It plays the compiler's
// part: it forms addresses for sets of nodes, using its own copy of the
// node numbering rules, and checks at the node ports that exactly those
// nodes receive a generator command, all in the same cycle. Sequence run
// times are compared with the run-time model of the design,
//   parallel / pipelined: T = sum of (issue + delta) + last execution time + 1
//   serial:               T = sum of (issue + delta + execution) + 2N - 1
// where the +1 is the receiver's register stage and each serial
// dependency adds two cycles of turnaround (busy must be seen to fall).
// T is counted from the first link word to the last busy cycle.
// The caller instantiates qnet_top and connects it to the ports; the
// harness reports its counts on output ports and the caller prints the result.
module tb_qnet_harness
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC       = SUBID_NCBIT,
  parameter int          N_NODES   = 16,
  parameter int          N_SUBNETS = 4,
  localparam int         AWP       = (((ENC == SUBID_NCBIT) ? $clog2(N_SUBNETS) : N_SUBNETS)
                                     + ((ENC == SUBBIT_NCID) ? $clog2(N_NODES / N_SUBNETS)
                                                             : N_NODES / N_SUBNETS))
) (
  input  logic clk,
  // connection to the qnet_top under test
  output logic               rst_n,
  output logic               in_valid,
  input  logic               in_ready,
  output inst_body_t         in_inst,
  output logic [(AWP<1?1:AWP)-1:0] in_addr,
  input  qci_cmd_t           cmd [N_NODES],
  output logic [N_NODES-1:0] meas_bit,
  input  logic [N_NODES-1:0] node_busy,
  input  logic [N_NODES-1:0] meas_result,
  input  logic [N_NODES-1:0] meas_seen,
  input  logic               idle,
  input  logic [31:0]        stall_cycles,
  input  logic [31:0]        issued,
  input  logic               link_valid,
  // results
  output int   checks,
  output int   failures,
  output bit   finished,
  output int   n_parallel,   // multi-node instructions executed
  output int   n_pipelined,  // instructions issued back to back to different nodes
  output int   n_stall,      // cycles an instruction waited for a busy node
  output int   n_multiword,  // instructions whose address took more than one link word
  output int   n_vz,         // pulses whose phase carried a virtual-Z frame
  output int   n_meas,       // measurement outcomes returned
  output int   n_ent         // entangle commands
);

  localparam int M     = N_SUBNETS;
  localparam int K     = N_NODES / N_SUBNETS;
  localparam int WS    = (ENC == SUBID_NCBIT) ? $clog2(M) : M;
  localparam int WNC   = (ENC == SUBBIT_NCID) ? $clog2(K) : K;
  localparam int AW    = (WS + WNC < 1) ? 1 : WS + WNC;
  localparam int DELTA = (WS + WNC + 15) / 16 - ((WS + WNC) > 0 ? 1 : 0);
  localparam int N     = N_NODES;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%s N=%0d M=%0d] %s @%0t", ENC.name(), N, M, msg, $time);
    end
  endtask

  // node number of local controller k in subnet s (independent copy of the rule)
  function automatic int nid(int s, int k);
    if (ENC == SUBBIT_NCID) return k * M + s;
    return s * K + k;
  endfunction

  function automatic int issue_of(opcode_e op);
    case (op) OP_RX, OP_RY: return 5; OP_RZ, OP_ENT: return 3; OP_CRX: return 4; default: return 2; endcase
  endfunction
  function automatic int exec_of(opcode_e op);
    case (op) OP_RX, OP_RY, OP_CRX: return 62; OP_RZ: return 11; OP_ENT: return 1160; default: return 400; endcase
  endfunction

  // Address for subnet set ss and local set cs; the sets must suit the scheme.
  function automatic logic [AW-1:0] mk_addr(logic [M-1:0] ss, logic [K-1:0] cs);
    logic [AW+63:0] a;
    int sid, cid;
    sid = 0; cid = 0;
    for (int i = 0; i < M; i++) if (ss[i]) sid = i;
    for (int i = 0; i < K; i++) if (cs[i]) cid = i;
    a = '0;
    if (ENC == SUBBIT_NCID) a = (AW+64)'(cid);
    else for (int i = 0; i < K; i++) a[i] = cs[i];
    if (ENC == SUBID_NCBIT) a = a | ((AW+64)'(sid) << WNC);
    else for (int i = 0; i < M; i++) a[WNC + i] = ss[i];
    return a[AW-1:0];
  endfunction

  function automatic logic [N-1:0] nodes_of(logic [M-1:0] ss, logic [K-1:0] cs);
    logic [N-1:0] v;
    v = '0;
    for (int s = 0; s < M; s++) for (int k = 0; k < K; k++) if (ss[s] && cs[k]) v[nid(s, k)] = 1'b1;
    return v;
  endfunction

  // ---- monitors -------------------------------------------------------------
  int           cyc;
  logic [N-1:0] cmd_nodes;
  int           cmd_first, cmd_last;
  qci_cmd_t     cmd_at [N];
  int           first_word, last_busy;
  bit           prev_last_word;
  int           words_left;

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int n = 0; n < N; n++) if (cmd[n].valid) begin
        if (cmd_nodes == '0) cmd_first = cyc;
        cmd_nodes[n] = 1'b1; cmd_last = cyc; cmd_at[n] = cmd[n];
        if (cmd[n].gen == GEN_ENT) n_ent++;
      end
      if (link_valid && first_word < 0) first_word = cyc;
      if (node_busy != '0) last_busy = cyc;
    end
  end

  // count pipelined issue: a new instruction's first word right after a last word, no stall
  logic [31:0] issued_prev;
  always @(negedge clk) if (rst_n) begin
    if (issued != issued_prev && (dut_tx_active_prev)) n_pipelined++;
    issued_prev = issued;
  end
  bit dut_tx_active_prev;
  always @(negedge clk) dut_tx_active_prev = link_valid;

  // ---- driver ---------------------------------------------------------------
  task automatic push(input opcode_e op, input logic [1:0] q, input param_t p0, p1, p2,
                      input logic [AW-1:0] a);
    in_inst = '0; in_inst.op = op; in_inst.qsel = q;
    in_inst.params[0] = p0; in_inst.params[1] = p1; in_inst.params[2] = p2;
    in_addr = a; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    if (DELTA > 0) n_multiword++;
  endtask

  task automatic begin_seq();
    cmd_nodes = '0; first_word = -1; last_busy = -1;
  endtask

  task automatic wait_idle();
    int n;
    n = 0;
    @(negedge clk);
    while (!idle && n < 20000) begin @(negedge clk); n++; end
    chk(idle, "returns to idle");
    repeat (2) @(negedge clk);
  endtask

  function automatic int runtime();
    return last_busy - first_word + 1;
  endfunction

  initial begin
    logic [M-1:0] ss;
    logic [K-1:0] cs;
    logic [N-1:0] exp_nodes, set_a, set_b, set_c;
    int t_exp, n0, single_s, single_k, other_k;
    checks = 0; failures = 0; finished = 0;
    n_parallel = 0; n_pipelined = 0; n_stall = 0; n_multiword = 0; n_vz = 0; n_meas = 0; n_ent = 0;
    cyc = 0; issued_prev = 0;
    rst_n = 0; in_valid = 0; in_inst = '0; in_addr = '0; meas_bit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. one parallel instruction on the widest set the scheme allows
    ss = (ENC == SUBID_NCBIT) ? M'(1) << (M - 1) : '1;
    cs = (ENC == SUBBIT_NCID) ? K'(1) << (K - 1) : '1;
    exp_nodes = nodes_of(ss, cs);
    begin_seq();
    push(OP_RX, 2'd1, 16'h2000, 16'h0000, 16'h0000, mk_addr(ss, cs));
    wait_idle();
    chk(cmd_nodes == exp_nodes, "parallel: exactly the addressed nodes pulse");
    chk(cmd_first == cmd_last, "parallel: all nodes pulse in the same cycle");
    t_exp = (5 + DELTA) + 62 + 1;
    chk(runtime() == t_exp, $sformatf("parallel run time %0d expected %0d", runtime(), t_exp));
    if ($countones(exp_nodes) > 1) n_parallel++;

    // ---- 2. parallel sequence of three instructions on disjoint node sets
    begin_seq();
    n0 = 0;
    for (int i = 0; i < 3; i++) begin
      logic [M-1:0] s2; logic [K-1:0] c2;
      s2 = (ENC == SUBID_NCBIT) ? M'(1) << (i % M) : M'(1) << (i % M);
      c2 = (ENC == SUBBIT_NCID) ? K'(1) << (i % K) : '1;
      if (ENC == SUBBIT_NCID) s2 = '1;
      push(OP_RY, 2'd2, 16'h1000, 16'h0000, 16'h0000, mk_addr(s2, c2));
    end
    wait_idle();
    t_exp = 3 * (5 + DELTA) + 62 + 1;
    chk(runtime() == t_exp, $sformatf("parallel sequence run time %0d expected %0d", runtime(), t_exp));
    n_parallel += 3;

    // ---- 3. pipelined sequence R_Z, R_X, R_Y on three different single nodes
    begin_seq();
    push(OP_RZ, 2'd1, 16'h0100, 16'h0, 16'h0, mk_addr(M'(1), K'(1)));
    push(OP_RX, 2'd1, 16'h2000, 16'h0, 16'h0, mk_addr(M'(1) << (M > 1 ? 1 : 0), K'(1) << (K > 1 ? 1 : 0)));
    push(OP_RY, 2'd1, 16'h2000, 16'h0, 16'h0, mk_addr(M'(1) << (M - 1), K'(1) << (K - 1)));
    wait_idle();
    t_exp = (3 + DELTA) + (5 + DELTA) + (5 + DELTA) + 62 + 1;
    chk(runtime() == t_exp, $sformatf("pipelined run time %0d expected %0d", runtime(), t_exp));

    // ---- 4. serial sequence on one node: R_Z, R_X, R_Y (virtual Z carried into both pulses)
    single_s = M - 1; single_k = 0;
    begin_seq();
    n0 = stall_cycles;
    push(OP_RZ, 2'd1, 16'h0800, 16'h0, 16'h0, mk_addr(M'(1) << single_s, K'(1) << single_k));
    push(OP_RX, 2'd1, 16'h2000, 16'h0010, 16'h0, mk_addr(M'(1) << single_s, K'(1) << single_k));
    wait_idle();
    chk(cmd_at[nid(single_s, single_k)].phase == 16'h0810, "virtual Z phase on R_X");
    if (cmd_at[nid(single_s, single_k)].phase == 16'h0810) n_vz++;
    t_exp = (3 + DELTA + 11) + (5 + DELTA + 62) + 2 * 2 - 1;
    chk(runtime() == t_exp, $sformatf("serial run time %0d expected %0d", runtime(), t_exp));
    chk(stall_cycles > n0, "serial: dependency stall");
    n_stall += stall_cycles - n0;
    begin_seq();
    push(OP_RY, 2'd1, 16'h2000, 16'h0, 16'h0, mk_addr(M'(1) << single_s, K'(1) << single_k));
    push(OP_RY, 2'd2, 16'h2000, 16'h0, 16'h0, mk_addr(M'(1) << single_s, K'(1) << single_k));
    wait_idle();
    chk(cmd_at[nid(single_s, single_k)].phase == 16'h4000, "qubit 2 has its own frame");

    // ---- 5. measurement of a parallel set; outcomes from a pattern
    ss = (ENC == SUBID_NCBIT) ? M'(1) : '1;
    cs = (ENC == SUBBIT_NCID) ? K'(1) : '1;
    exp_nodes = nodes_of(ss, cs);
    for (int n = 0; n < N; n++) meas_bit[n] = (n % 3) == 1;
    begin_seq();
    push(OP_MEAS, 2'd0, 16'h0, 16'h0, 16'h0, mk_addr(ss, cs));
    wait_idle();
    chk(meas_seen == exp_nodes, "measured nodes reported");
    chk((meas_result & exp_nodes) == (meas_bit & exp_nodes), "measurement outcomes");
    t_exp = (2 + DELTA) + 400 + 1;
    chk(runtime() == t_exp, $sformatf("measure run time %0d expected %0d", runtime(), t_exp));
    n_meas += $countones(meas_seen);

    // ---- 6. entangle two nodes in parallel where the scheme allows, else pipelined
    begin_seq();
    if (ENC == SUBID_NCBIT) push(OP_ENT, 2'd0, 16'h0003, 16'h0, 16'h0, mk_addr(M'(1), K'(3)));
    else if (ENC == SUBBIT_NCID) push(OP_ENT, 2'd0, 16'h0003, 16'h0, 16'h0, mk_addr(M'(3), K'(1)));
    else push(OP_ENT, 2'd0, 16'h0003, 16'h0, 16'h0, mk_addr(M'(1), K'(3)));
    wait_idle();
    chk($countones(cmd_nodes) == 2 && cmd_at[nid(0, 0)].gen == GEN_ENT, "entangle on two nodes");
    chk(runtime() == (3 + DELTA) + 1160 + 1, $sformatf("entangle run time %0d", runtime()));

    finished = 1;
  end
endmodule
