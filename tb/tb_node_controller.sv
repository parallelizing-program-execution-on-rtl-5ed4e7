// tb_node_controller: checks one node controller.
//  - an instruction whose select is low is ignored;
//  - busy rises the cycle after capture and lasts exactly the execution
//    time of the opcode (R_X/R_Y/CR_X 62, R_Z 11, entangle 1160, measure 400);
//  - the generator command appears three cycles after capture (three-stage
//    pipeline) and goes to MW for the electron (qubit 0), RF for Carbon-13;
//  - R_Z issues no command but shifts the phase of later pulses on the same
//    qubit only (virtual Z); R_Y adds a quarter turn to the phase;
//  - a measurement reports meas_bit through res_valid / res_bit.
// Execution times are the published ones; the three-cycle command latency
// and the MW/RF assignment per qubit are this implementation's.
module tb_node_controller;
  import qnet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       inst_valid, sel, busy, done, res_valid, res_bit, meas_bit;
  inst_body_t inst;
  qci_cmd_t   cmd;

  node_controller #(.N_QUBITS(3)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // command monitor
  qci_cmd_t cmd_seen;
  int       cmd_cyc, n_cmd = 0;
  always @(negedge clk) if (rst_n && cmd.valid) begin
    cmd_seen = cmd; cmd_cyc = cyc; n_cmd++;
  end

  // Send one instruction; returns the cycle of capture.
  task automatic send(input opcode_e op, input logic [1:0] q, input param_t p0, p1, p2,
                      input logic s, output int cap);
    inst_valid = 1; sel = s;
    inst.op = op; inst.qsel = q; inst.params[0] = p0; inst.params[1] = p1; inst.params[2] = p2;
    cap = cyc;       // cycle in which the instruction is presented
    @(negedge clk);
    inst_valid = 0; sel = 0; inst = '0;
  endtask

  // Run one instruction, measure busy length and command timing.
  task automatic run(input opcode_e op, input logic [1:0] q, input param_t p0, p1, p2,
                     input int exp_len, input bit exp_cmd, input gen_e exp_gen,
                     input param_t exp_phase);
    int cap, len, n0;
    n0 = n_cmd;
    send(op, q, p0, p1, p2, 1'b1, cap);
    len = 0;
    while (busy) begin len++; @(negedge clk); end
    chk(len == exp_len, $sformatf("%s busy length %0d expected %0d", op.name(), len, exp_len));
    @(negedge clk);
    chk((n_cmd - n0) == (exp_cmd ? 1 : 0), $sformatf("%s command count", op.name()));
    if (exp_cmd && n_cmd > n0) begin
      chk(cmd_cyc == cap + 3, $sformatf("%s command latency %0d", op.name(), cmd_cyc - cap));
      chk(cmd_seen.gen == exp_gen, $sformatf("%s generator", op.name()));
      chk(cmd_seen.op == op && cmd_seen.qsel == q && cmd_seen.angle == p0,
          $sformatf("%s command fields", op.name()));
      if (op inside {OP_RX, OP_RY, OP_CRX})
        chk(cmd_seen.phase == exp_phase, $sformatf("%s phase %h expected %h", op.name(), cmd_seen.phase, exp_phase));
    end
  endtask

  initial begin
    int cap;
    inst_valid = 0; sel = 0; inst = '0; meas_bit = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // not selected: nothing happens
    send(OP_RX, 2'd1, 16'h1234, 16'h0, 16'h0, 1'b0, cap);
    repeat (5) @(negedge clk);
    chk(!busy && n_cmd == 0, "unselected instruction ignored");

    run(OP_RX,  2'd1, 16'h2000, 16'h0100, 16'h0AAA, 62, 1, GEN_RF, 16'h0100);
    run(OP_RX,  2'd0, 16'h2000, 16'h0100, 16'h0AAA, 62, 1, GEN_MW, 16'h0100);
    run(OP_RY,  2'd2, 16'h1000, 16'h0000, 16'h0000, 62, 1, GEN_RF, 16'h4000);
    // virtual Z on qubit 1: +0x0800, then +0x0100
    run(OP_RZ,  2'd1, 16'h0800, 16'h0, 16'h0, 11, 0, GEN_MW, 16'h0);
    run(OP_RZ,  2'd1, 16'h0100, 16'h0, 16'h0, 11, 0, GEN_MW, 16'h0);
    run(OP_RX,  2'd1, 16'h2000, 16'h0010, 16'h0, 62, 1, GEN_RF, 16'h0910);
    run(OP_RY,  2'd1, 16'h2000, 16'h0000, 16'h0, 62, 1, GEN_RF, 16'h4900);
    run(OP_RX,  2'd2, 16'h2000, 16'h0010, 16'h0, 62, 1, GEN_RF, 16'h0010);  // other qubit unaffected
    run(OP_CRX, 2'd1, 16'h3000, 16'h0001, 16'h0, 62, 1, GEN_RF, 16'h0901);
    run(OP_ENT, 2'd0, 16'h0005, 16'h0, 16'h0, 1160, 1, GEN_ENT, 16'h0);

    // measurement, outcome 1 then 0
    for (int b = 1; b >= 0; b--) begin
      int got_valid;
      meas_bit = 1'(b);
      send(OP_MEAS, 2'd0, 16'h0, 16'h0, 16'h0, 1'b1, cap);
      got_valid = 0;
      for (int c = 0; c < 410; c++) begin
        if (res_valid) begin
          got_valid++;
          chk(res_bit == 1'(b), "measurement outcome");
          chk(cyc == cap + 401, $sformatf("measurement report cycle %0d", cyc - cap));
        end
        @(negedge clk);
      end
      chk(got_valid == 1, "one measurement report");
      chk(cmd_seen.gen == GEN_MEAS, "readout command");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
