// tb_ni_rx: checks that the network receiver rebuilds instructions from the
// word stream. Packets are formed here (opcode word {qsel, opcode}, three
// address words LSB first for a 40-bit address, then 16-bit parameters
// whose count follows from the opcode) and sent back to back or with idle
// cycles between them. Each instruction must appear, complete and exactly
// once, with inst_valid in the cycle after its last word. Parameter slots
// the opcode does not carry must read zero.
// The packet length 2 + delta + parameters follows the published issue-time
// model; the word layout is this implementation's own.
module tb_ni_rx;
  import qnet_pkg::*;

  localparam int AW = 40, L = 16, AWORDS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          link_valid, inst_valid;
  logic [L-1:0]  link_data;
  inst_body_t    inst;
  logic [AW-1:0] inst_addr;

  ni_rx #(.AW(AW), .LINK_W(L)) dut (.*);

  int checks = 0, failures = 0;
  inst_body_t    exp_inst_q[$];
  logic [AW-1:0] exp_addr_q[$];
  int            exp_cyc_q[$];
  int            cyc = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    link_valid = 0; link_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      inst_body_t b;
      logic [AW-1:0] ad;
      logic [L-1:0] w [$];
      int np;
      case ($urandom % 7)
        0: b.op = OP_RX; 1: b.op = OP_RY; 2: b.op = OP_RZ; 3: b.op = OP_CRX;
        4: b.op = OP_ENT; 5: b.op = OP_MEAS; default: b.op = OP_NOP;
      endcase
      b.qsel = 2'($urandom % 3);
      w.delete();
      np = (b.op == OP_RX || b.op == OP_RY) ? 3 : (b.op == OP_CRX) ? 2 :
           (b.op == OP_RZ || b.op == OP_ENT) ? 1 : 0;
      for (int p = 0; p < MAX_PARAMS; p++) b.params[p] = (p < np) ? 16'($urandom) : 16'h0;
      ad = {8'($urandom), 32'($urandom)};
      w.push_back(16'({b.qsel, b.op}));
      for (int k = 0; k < AWORDS; k++) w.push_back(16'(48'(ad) >> (16*k)));
      for (int p = 0; p < np; p++) w.push_back(b.params[p]);
      exp_inst_q.push_back(b); exp_addr_q.push_back(ad);
      foreach (w[k]) begin
        link_valid = 1; link_data = w[k];
        // inst_valid must be high in the cycle after the last word
        if (k == w.size() - 1) exp_cyc_q.push_back(cyc + 1);
        @(negedge clk);
      end
      link_valid = 0; link_data = 16'($urandom);  // data wires are don't-care when idle
      if ($urandom % 3 == 0) repeat (1 + $urandom % 3) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    chk(exp_inst_q.size() == 0, "every instruction delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && inst_valid) begin
    chk(exp_inst_q.size() > 0, "no spurious instruction");
    if (exp_inst_q.size() > 0) begin
      chk(inst == exp_inst_q[0], "instruction fields");
      chk(inst_addr == exp_addr_q[0], "address");
      chk(cyc == exp_cyc_q[0], "one-cycle delivery latency");
      void'(exp_inst_q.pop_front()); void'(exp_addr_q.pop_front()); void'(exp_cyc_q.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
