// node_controller: controller of one node (one NV center) of the distributed
// system. It watches the instruction broadcast, accepts the instructions its
// decoders select, and turns each into a command for the node's signal
// generation hardware.
//
// A three-stage pipeline handles an accepted instruction:
//   S1 capture   - registers the instruction when inst_valid and sel are high;
//   S2 decode    - picks the hardware (MW for the electron, RF for Carbon-13,
//                  entanglement, readout) and computes the drive phase;
//   S3 configure - emits the one-cycle command `cmd` and updates the phase frame.
// R_Z is executed as a virtual Z gate: it issues no pulse but advances the
// phase frame of its qubit, which is added to the phase of later R_X / R_Y /
// CR_X pulses on that qubit. R_Y is R_X with an extra quarter turn of phase.
//
// Timing: `busy` rises the cycle after the instruction is captured and stays
// high for exactly exec_cycles(op) cycles (62 for R_X/R_Y/CR_X, 11 for R_Z,
// 1160 for entangle, 400 for measure, taken from the published execution
// times, which already include this pipeline). `done` pulses the cycle after
// busy falls; for a measurement `res_valid`/`res_bit` report the value of
// `meas_bit` sampled in the last busy cycle. A node runs one instruction at a
// time; the central controller must not address it while it is busy (an
// assertion checks this). Parameter meaning (angle, phase, aux) and the qubit
// numbering are choices of this implementation.
module node_controller
  import qnet_pkg::*;
#(
  parameter int N_QUBITS = 3  // qubits in the node: electron + two Carbon-13 (semi-distributed)
) (
  input  logic       clk,
  input  logic       rst_n,
  // instruction broadcast (from the network receiver) and decoded select
  input  logic       inst_valid,
  input  inst_body_t inst,
  input  logic       sel,
  // status back to the central controller
  output logic       busy,
  output logic       done,
  output logic       res_valid,
  output logic       res_bit,
  // quantum-classical interface
  output qci_cmd_t   cmd,
  input  logic       meas_bit
);

  localparam int CNT_W = 11;  // holds the longest execution time, 1160

  logic             s1_v, s2_v;
  inst_body_t       s1_inst, s2_inst;
  gen_e             s2_gen;
  param_t           s2_phase;
  param_t           frame [N_QUBITS];
  logic [CNT_W-1:0] cnt;
  opcode_e          run_op;

  logic accept;
  assign accept = inst_valid && sel && (inst.op != OP_NOP);
  assign busy   = (cnt != '0);

  // S1: capture
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      s1_inst <= '0;
    end else begin
      s1_v <= accept && !busy;
      if (accept && !busy) s1_inst <= inst;
    end
  end

  // S2: decode
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v     <= 1'b0;
      s2_inst  <= '0;
      s2_gen   <= GEN_MW;
      s2_phase <= '0;
    end else begin
      s2_v <= s1_v;
      if (s1_v) begin
        s2_inst <= s1_inst;
        case (s1_inst.op)
          OP_ENT:  s2_gen <= GEN_ENT;
          OP_MEAS: s2_gen <= GEN_MEAS;
          default: s2_gen <= (s1_inst.qsel == '0) ? GEN_MW : GEN_RF;
        endcase
        s2_phase <= s1_inst.params[1] + frame[s1_inst.qsel]
                  + ((s1_inst.op == OP_RY) ? QUARTER_TURN : param_t'(0));
      end
    end
  end

  // S3: configure the generator, keep the virtual-Z frame
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd <= '0;
      for (int q = 0; q < N_QUBITS; q++) frame[q] <= '0;
    end else begin
      cmd.valid <= 1'b0;
      if (s2_v) begin
        if (s2_inst.op == OP_RZ) begin
          frame[s2_inst.qsel] <= frame[s2_inst.qsel] + s2_inst.params[0];
        end else begin
          cmd.valid <= 1'b1;
          cmd.gen   <= s2_gen;
          cmd.op    <= s2_inst.op;
          cmd.qsel  <= s2_inst.qsel;
          cmd.angle <= s2_inst.params[0];
          cmd.phase <= (s2_inst.op == OP_RX || s2_inst.op == OP_RY || s2_inst.op == OP_CRX)
                       ? s2_phase : s2_inst.params[1];
          cmd.aux   <= s2_inst.params[2];
        end
      end
    end
  end

  // Execution timer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      run_op    <= OP_NOP;
      done      <= 1'b0;
      res_valid <= 1'b0;
      res_bit   <= 1'b0;
    end else begin
      done      <= 1'b0;
      res_valid <= 1'b0;
      if (accept && !busy) begin
        cnt    <= CNT_W'(exec_cycles(inst.op));
        run_op <= inst.op;
      end else if (busy) begin
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          done <= 1'b1;
          if (run_op == OP_MEAS) begin
            res_valid <= 1'b1;
            res_bit   <= meas_bit;
          end
        end
      end
    end
  end

  // An addressed node must be idle: the central controller resolves
  // node controller dependencies before it issues.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !(accept && busy))
    else $error("node_controller: instruction addressed to a busy node");
  a_qsel_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(accept && int'(inst.qsel) >= N_QUBITS))
    else $error("node_controller: qubit select out of range");

endmodule
