// tb_ni_tx: checks the network transmitter's word format and issue timing.
// A 40-bit address on a 16-wire link needs three address words (delta = 2),
// so an instruction takes 2 + 2 + nparams(op) link cycles. Random
// instructions are offered with random gaps; a monitor collects the words of
// each instruction and compares them with the expected packet built here
// (opcode word, address words LSB first, parameter words). When the next
// instruction is already waiting, its first word must follow the previous
// last word with no idle cycle.
// The packet length 2 + delta + parameters follows the published issue-time
// model; the word layout is this implementation's own.
module tb_ni_tx;
  import qnet_pkg::*;

  localparam int AW = 40, L = 16, AWORDS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready, link_valid, tx_last;
  inst_body_t    in_inst;
  logic [AW-1:0] in_addr;
  logic [L-1:0]  link_data;

  ni_tx #(.AW(AW), .LINK_W(L)) dut (.*);

  int checks = 0, failures = 0;

  // expected word stream, filled by the driver
  logic [L-1:0] exp_q[$];
  int           exp_len_q[$];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  function automatic opcode_e rand_op();
    case ($urandom % 6)
      0: return OP_RX; 1: return OP_RY; 2: return OP_RZ;
      3: return OP_CRX; 4: return OP_ENT; default: return OP_MEAS;
    endcase
  endfunction

  int n_sent = 0, n_b2b = 0;

  // driver
  initial begin
    in_valid = 0; in_inst = '0; in_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      inst_body_t b;
      logic [AW-1:0] ad;
      int np;
      b.op = rand_op();
      b.qsel = 2'($urandom % 3);
      for (int p = 0; p < MAX_PARAMS; p++) b.params[p] = 16'($urandom);
      ad = {8'($urandom), 32'($urandom)};
      np = (b.op == OP_RX || b.op == OP_RY) ? 3 : (b.op == OP_CRX) ? 2 :
           (b.op == OP_RZ || b.op == OP_ENT) ? 1 : 0;
      exp_q.push_back(16'({b.qsel, b.op}));
      for (int w = 0; w < AWORDS; w++) exp_q.push_back(16'((48'(ad)) >> (16*w)));
      for (int p = 0; p < np; p++) exp_q.push_back(b.params[p]);
      exp_len_q.push_back(1 + AWORDS + np);
      // inputs change at the falling edge; the rising edge after a falling
      // edge with in_ready high takes the instruction
      in_valid = 1; in_inst = b; in_addr = ad;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      n_sent++;
      if ($urandom % 2) repeat ($urandom % 4) @(negedge clk);
    end
    repeat (20) @(posedge clk);
    chk(exp_q.size() == 0, "all words transmitted");
    chk(n_b2b > 20, "back-to-back issue exercised");
    $display("sent=%0d back_to_back=%0d", n_sent, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int  cur_len = 0, cur_pos = 0;
  bit  prev_last = 0;
  always @(negedge clk) if (rst_n) begin
    if (link_valid) begin
      if (cur_pos == 0) begin
        cur_len = exp_len_q.size() ? exp_len_q.pop_front() : -1;
        if (prev_last) n_b2b++;
      end
      chk(exp_q.size() > 0 && link_data == exp_q[0], "word content");
      if (exp_q.size()) void'(exp_q.pop_front());
      cur_pos++;
      chk(tx_last == (cur_pos == cur_len), "tx_last position / issue length");
      if (cur_pos == cur_len) cur_pos = 0;
    end else begin
      chk(cur_pos == 0, "no gap inside an instruction");
    end
    prev_last = link_valid && tx_last;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
