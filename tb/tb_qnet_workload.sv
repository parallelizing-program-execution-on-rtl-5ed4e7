// tb_qnet_workload: runs the single-qubit gate layers of a benchmark-style
// program (alternating logical R_Y and R_Z layers over every logical qubit,
// as in the variational-ansatz benchmarks) through qnet_top, and compares the
// measured run time with a reference schedule and with a one-node-per-
// instruction (SISD, ID address) baseline.
//
// Mapping (semi-distributed): logical qubit i uses nodes 2i and 2i+1. Its
// four physical data qubits are the two Carbon-13 spins (qsel 1 and 2) of
// each node; the electron stays free for entanglement. Decomposition:
//   R_Y_L(t): R_Y(t) on both data qubits of node 2i (one node, so serial);
//   R_Z_L(p): R_Z(p) on qsel 1 of node 2i and of node 2i+1 (two nodes).
// The compiler's parallel form sends one instruction per subnet and layer
// step, its local bitmap naming every node that takes part (0x55 for the
// first nodes of four logical qubits, 0xFF for R_Z). The qubit choice and the
// layer program are this testbench's choices; the decompositions follow the
// baseline logical-gate decompositions of the design.
//
// Reference schedule, independent of the RTL: instruction i starts at
//   max(start(i-1) + W(i-1), start(j) + W(j) + E(j) + 2 for every earlier j
//       that shares a node with i)
// with W = issue time (2 + delta + parameters) and E = execution time; the
// run time is the last busy cycle minus the first link word plus one.
// Configuration: 64 nodes, subID_ncBIT, 8 subnets of 8, mode (3, 8), delta 0.
module tb_qnet_workload;
  import qnet_pkg::*;

  localparam enc_scheme_e ENC = SUBID_NCBIT;
  localparam int N  = 64;
  localparam int M  = 8;
  localparam int K  = N / M;
  localparam int AW = 3 + K;
  localparam int LQ = N / 2;        // logical qubits
  localparam int LAYERS = 3;
  localparam int MAXI = 512;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          rst_n, in_valid, in_ready, idle, link_valid;
  inst_body_t    in_inst;
  logic [AW-1:0] in_addr;
  qci_cmd_t      cmd [N];
  logic [N-1:0]  meas_bit, node_busy, node_done, meas_result, meas_seen;
  logic [31:0]   issued, stall_cycles;
  logic [15:0]   link_data;

  qnet_top #(.ENC(ENC), .N_NODES(N), .N_SUBNETS(M)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  function automatic int issue_of(opcode_e op);
    case (op) OP_RX, OP_RY: return 5; OP_RZ, OP_ENT: return 3; OP_CRX: return 4; default: return 2; endcase
  endfunction
  function automatic int exec_of(opcode_e op);
    case (op) OP_RX, OP_RY, OP_CRX: return 62; OP_RZ: return 11; OP_ENT: return 1160; default: return 400; endcase
  endfunction

  // ---- program ----------------------------------------------------------------
  opcode_e      p_op   [MAXI];
  logic [1:0]   p_q    [MAXI];
  int           p_sub  [MAXI];
  logic [K-1:0] p_cs   [MAXI];
  param_t       p_ang  [MAXI];
  int           n_inst;

  function automatic param_t theta(int l); return param_t'(16'h1555 + 16'h0100 * l); endfunction
  function automatic param_t phi(int l);   return param_t'(16'h0300 + 16'h0040 * l); endfunction

  task automatic add(opcode_e op, logic [1:0] q, int s, logic [K-1:0] cs, param_t a);
    p_op[n_inst] = op; p_q[n_inst] = q; p_sub[n_inst] = s; p_cs[n_inst] = cs; p_ang[n_inst] = a;
    n_inst++;
  endtask

  task automatic build_program();
    n_inst = 0;
    for (int l = 0; l < LAYERS; l++) begin
      for (int q = 1; q <= 2; q++)
        for (int s = 0; s < M; s++) add(OP_RY, 2'(q), s, K'(8'h55), theta(l));
      for (int s = 0; s < M; s++) add(OP_RZ, 2'd1, s, K'(8'hFF), phi(l));
    end
  endtask

  function automatic logic [N-1:0] nodes(int i);
    logic [N-1:0] v = '0;
    for (int k = 0; k < K; k++) if (p_cs[i][k]) v[p_sub[i] * K + k] = 1'b1;
    return v;
  endfunction

  // reference schedule of instructions given as (node set, W, E)
  function automatic int schedule(int n, logic [N-1:0] set [MAXI*K], int w [MAXI*K], int e [MAXI*K]);
    int st [MAXI*K];
    int t_end;
    t_end = 0;
    for (int i = 0; i < n; i++) begin
      st[i] = (i == 0) ? 0 : st[i-1] + w[i-1];
      for (int j = 0; j < i; j++)
        if ((set[i] & set[j]) != '0 && st[j] + w[j] + e[j] + 2 > st[i]) st[i] = st[j] + w[j] + e[j] + 2;
      if (st[i] + w[i] + e[i] > t_end) t_end = st[i] + w[i] + e[i];
    end
    return t_end + 1;
  endfunction

  // ---- monitors ---------------------------------------------------------------
  int cyc = 0, first_word = -1, last_busy = -1;
  int     npulse [N][3];
  param_t phase_seen [N][3][LAYERS];
  param_t angle_seen [N][3][LAYERS];
  int     stall_seen = 0;

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (link_valid && first_word < 0) first_word = cyc;
      if (node_busy != '0) last_busy = cyc;
      for (int n = 0; n < N; n++) if (cmd[n].valid) begin
        if (npulse[n][cmd[n].qsel] < LAYERS) begin
          phase_seen[n][cmd[n].qsel][npulse[n][cmd[n].qsel]] = cmd[n].phase;
          angle_seen[n][cmd[n].qsel][npulse[n][cmd[n].qsel]] = cmd[n].angle;
        end
        npulse[n][cmd[n].qsel]++;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] set [MAXI*K];
    int w [MAXI*K], e [MAXI*K];
    int n, t_par, t_sisd, t_meas, wait_n;
    param_t frame;

    for (int i = 0; i < N; i++) for (int q = 0; q < 3; q++) npulse[i][q] = 0;
    rst_n = 0; in_valid = 0; in_inst = '0; in_addr = '0; meas_bit = '0;
    build_program();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // stream the parallel program
    for (int i = 0; i < n_inst; i++) begin
      in_inst = '0; in_inst.op = p_op[i]; in_inst.qsel = p_q[i]; in_inst.params[0] = p_ang[i];
      in_addr = {3'(p_sub[i]), p_cs[i]};
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    wait_n = 0;
    @(negedge clk);
    while (!idle && wait_n < 100000) begin @(negedge clk); wait_n++; end
    chk(idle, "network returns to idle");
    t_meas = last_busy - first_word + 1;

    // reference run time of the parallel program
    for (int i = 0; i < n_inst; i++) begin
      set[i] = nodes(i); w[i] = issue_of(p_op[i]); e[i] = exec_of(p_op[i]);
    end
    t_par = schedule(n_inst, set, w, e);
    chk(t_meas == t_par, $sformatf("parallel program run time %0d, reference %0d", t_meas, t_par));
    chk(issued == 32'(n_inst), $sformatf("issued %0d of %0d instructions", issued, n_inst));
    chk(stall_cycles != 0, "dependent layers stall on busy nodes");

    // SISD baseline: the same physical operations, one node per instruction
    n = 0;
    for (int i = 0; i < n_inst; i++)
      for (int k = 0; k < K; k++) if (p_cs[i][k]) begin
        set[n] = '0; set[n][p_sub[i] * K + k] = 1'b1;
        w[n] = issue_of(p_op[i]); e[n] = exec_of(p_op[i]);
        n++;
      end
    t_sisd = schedule(n, set, w, e);
    $display("workload: %0d logical qubits, %0d layers, %0d instructions (SISD %0d)",
             LQ, LAYERS, n_inst, n);
    $display("run time %0d cycles (%0d ns at 10 MHz), SISD reference %0d cycles, speedup %0d.%02d",
             t_meas, t_meas * 100, t_sisd, t_sisd / t_meas, (t_sisd * 100 / t_meas) % 100);
    chk(t_par < t_sisd, "parallel addressing is faster than the SISD baseline");

    // every data qubit was driven once per layer with the right angle and frame
    for (int lq = 0; lq < LQ; lq++) begin
      int a, b;
      a = 2 * lq; b = 2 * lq + 1;
      chk(npulse[a][1] == LAYERS && npulse[a][2] == LAYERS && npulse[a][0] == 0,
          $sformatf("node %0d pulse counts %0d/%0d/%0d", a, npulse[a][0], npulse[a][1], npulse[a][2]));
      chk(npulse[b][0] + npulse[b][1] + npulse[b][2] == 0, $sformatf("node %0d gets no pulses", b));
      frame = '0;
      for (int l = 0; l < LAYERS; l++) begin
        chk(angle_seen[a][1][l] == theta(l) && angle_seen[a][2][l] == theta(l),
            $sformatf("node %0d layer %0d angle", a, l));
        chk(phase_seen[a][1][l] == param_t'(QUARTER_TURN + frame),
            $sformatf("node %0d layer %0d qsel 1 phase %h expected %h", a, l,
                      phase_seen[a][1][l], param_t'(QUARTER_TURN + frame)));
        chk(phase_seen[a][2][l] == QUARTER_TURN,
            $sformatf("node %0d layer %0d qsel 2 phase %h", a, l, phase_seen[a][2][l]));
        frame = frame + phi(l);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
