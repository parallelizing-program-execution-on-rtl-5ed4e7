// tb_central_controller: checks issue order, dependency stalls and timing of
// the central controller (subID_ncBIT, M = 4 subnets of K = 4, L = 16, so
// delta = 0 and an R_X takes 5 link cycles). The node controllers are
// modelled here: the model parses the link words, decodes the targets
// itself and holds each target busy for the execution time, starting two
// cycles after the last word (as the real network does). Checked:
//   - serial: R_X, R_X to the same node start 5 + 62 + 2 cycles apart
//     (issue + execution + 2 cycles of network turnaround);
//   - pipelined: R_X to different nodes follow back to back (5 cycles);
//   - parallel: one bitmap instruction occupies all four nodes it names;
//   - a node is never addressed while busy;
//   - measurement outcomes reported by nodes land in meas_result.
// The serial and pipelined rules follow the published execution model; the
// two turnaround cycles belong to this implementation.
module tb_central_controller;
  import qnet_pkg::*;

  localparam int M = 4, K = 4, N = 16, AW = 6, L = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready, link_valid, idle;
  inst_body_t    in_inst;
  logic [AW-1:0] in_addr;
  logic [L-1:0]  link_data;
  logic [N-1:0]  nc_busy, nc_res_valid, nc_res_bit, meas_result, meas_seen;
  logic [31:0]   issued, stall_cycles;

  central_controller #(.ENC(SUBID_NCBIT), .M(M), .K(K), .LINK_W(L), .FIFO_DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  function automatic int np_of(logic [3:0] op);
    case (op) 1, 2: return 3; 4: return 2; 3, 5: return 1; default: return 0; endcase
  endfunction
  function automatic int ex_of(logic [3:0] op);
    case (op) 1, 2, 4: return 62; 3: return 11; 5: return 1160; 6: return 400; default: return 0; endcase
  endfunction

  // ---- node controller model --------------------------------------------
  int cyc = 0;
  int busy_from [N], busy_to [N];
  int start_cyc [$];            // first-word cycle of every instruction
  logic [N-1:0] tgt_log [$];
  int pos = 0, len = 0;
  logic [3:0] cur_op;
  logic [N-1:0] meas_pending;
  int meas_at [N];

  always @(negedge clk) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) begin busy_from[n] = 0; busy_to[n] = -1; end
      nc_busy = '0; nc_res_valid = '0; nc_res_bit = '0; meas_pending = '0;
    end else begin
      cyc++;
      for (int n = 0; n < N; n++) nc_busy[n] = (cyc >= busy_from[n]) && (cyc <= busy_to[n]);
      nc_res_valid = '0;
      for (int n = 0; n < N; n++)
        if (meas_pending[n] && cyc == meas_at[n]) begin
          nc_res_valid[n] = 1'b1; nc_res_bit[n] = n[0] ^ n[2]; meas_pending[n] = 1'b0;
        end
      if (link_valid) begin
        if (pos == 0) begin
          cur_op = link_data[3:0];
          len = 2 + np_of(cur_op);
          start_cyc.push_back(cyc);
        end else if (pos == 1) begin
          logic [N-1:0] t;
          t = '0;
          for (int k = 0; k < K; k++) if (link_data[k]) t[int'(link_data[5:4])*K + k] = 1'b1;
          tgt_log.push_back(t);
        end
        pos++;
        if (pos == len) begin
          logic [N-1:0] t;
          t = tgt_log[$];
          for (int n = 0; n < N; n++) if (t[n]) begin
            chk(!(cyc + 1 <= busy_to[n]), $sformatf("node %0d addressed while busy", n));
            busy_from[n] = cyc + 2; busy_to[n] = cyc + 1 + ex_of(cur_op);
            if (cur_op == 4'd6) begin meas_pending[n] = 1'b1; meas_at[n] = cyc + 2 + ex_of(cur_op); end
          end
          pos = 0;
        end
      end
    end
  end

  // ---- driver -------------------------------------------------------------
  task automatic push(input opcode_e op, input logic [1:0] sub, input logic [3:0] bm);
    in_inst = '0; in_inst.op = op; in_inst.qsel = 2'd1;
    in_inst.params[0] = 16'hABCD; in_inst.params[1] = 16'h0001; in_inst.params[2] = 16'h0002;
    in_addr = {sub, bm}; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic wait_idle();
    int n = 0;
    @(negedge clk);
    while (!idle && n < 5000) begin @(negedge clk); n++; end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    int s0;
    in_valid = 0; in_inst = '0; in_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // serial: two R_X on node (0,0)
    s0 = start_cyc.size();
    push(OP_RX, 2'd0, 4'b0001);
    push(OP_RX, 2'd0, 4'b0001);
    wait_idle();
    chk(start_cyc.size() == s0 + 2, "serial: two issued");
    chk(start_cyc[s0+1] - start_cyc[s0] == 5 + 62 + 2,
        $sformatf("serial spacing %0d expected 69", start_cyc[s0+1] - start_cyc[s0]));
    chk(stall_cycles > 0, "dependency stall counted");

    // pipelined: R_X on four different nodes of different subnets
    s0 = start_cyc.size();
    push(OP_RX, 2'd0, 4'b0001);
    push(OP_RX, 2'd1, 4'b0010);
    push(OP_RX, 2'd2, 4'b0100);
    push(OP_RX, 2'd3, 4'b1000);
    wait_idle();
    for (int i = 1; i < 4; i++)
      chk(start_cyc[s0+i] - start_cyc[s0+i-1] == 5, "pipelined spacing 5");

    // parallel: one R_X to all four nodes of subnet 1, then R_Z to one of them
    s0 = start_cyc.size();
    push(OP_RX, 2'd1, 4'b1111);
    push(OP_RZ, 2'd1, 4'b0100);
    wait_idle();
    chk(tgt_log[s0] == 16'h00F0, "parallel targets");
    chk(start_cyc[s0+1] - start_cyc[s0] == 5 + 62 + 2, "parallel then dependent serial");

    // measurement on two nodes
    push(OP_MEAS, 2'd3, 4'b0101);
    wait_idle();
    chk(meas_seen == 16'h5000, $sformatf("measured nodes %h", meas_seen));
    chk(meas_result[12] == (1'b0 ^ 1'b1) && meas_result[14] == (1'b0 ^ 1'b1), "measurement values");

    // random stream: the model checks that no busy node is addressed
    for (int i = 0; i < 60; i++) begin
      opcode_e op;
      case ($urandom % 3) 0: op = OP_RX; 1: op = OP_RZ; default: op = OP_CRX; endcase
      push(op, 2'($urandom), 4'($urandom) | 4'b0001);
    end
    wait_idle();
    chk(issued == 32'(start_cyc.size()), "issued count");
    $display("issued=%0d stall_cycles=%0d", issued, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
