// tb_subnet: checks one subnet (index 2 of M = 4, K = 4 node controllers)
// under two encoding schemes. An instruction is broadcast with different
// addresses; exactly the node controllers the address names in this subnet
// must start (busy for 62 cycles, a generator command each), and an address
// for another subnet must leave the subnet idle. A measurement on one
// node controller must return that node's readout bit.
// The selection rules are the published encoding schemes.
module tb_subnet;
  import qnet_pkg::*;

  localparam int M = 4, K = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         inst_valid;
  inst_body_t   inst;
  logic [5:0]   addr_a;     // subID_ncBIT: 2 + 4 bits
  logic [5:0]   addr_b;     // subBIT_ncID: 4 + 2 bits
  logic [K-1:0] busy_a, done_a, rv_a, rb_a, busy_b, done_b, rv_b, rb_b, meas_bit;
  qci_cmd_t     cmd_a [K], cmd_b [K];

  subnet #(.ENC(SUBID_NCBIT), .M(M), .K(K), .SUB_IDX(2)) dut_a (
    .clk, .rst_n, .inst_valid, .inst, .inst_addr(addr_a),
    .busy(busy_a), .done(done_a), .res_valid(rv_a), .res_bit(rb_a), .cmd(cmd_a), .meas_bit);
  subnet #(.ENC(SUBBIT_NCID), .M(M), .K(K), .SUB_IDX(2)) dut_b (
    .clk, .rst_n, .inst_valid, .inst, .inst_addr(addr_b),
    .busy(busy_b), .done(done_b), .res_valid(rv_b), .res_bit(rb_b), .cmd(cmd_b), .meas_bit);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  logic [K-1:0] cmd_seen_a, cmd_seen_b, res_a, res_b, rvs_a, rvs_b;
  always @(negedge clk) if (rst_n) for (int k = 0; k < K; k++) begin
    if (cmd_a[k].valid) cmd_seen_a[k] = 1'b1;
    if (cmd_b[k].valid) cmd_seen_b[k] = 1'b1;
    if (rv_a[k]) begin rvs_a[k] = 1'b1; res_a[k] = rb_a[k]; end
    if (rv_b[k]) begin rvs_b[k] = 1'b1; res_b[k] = rb_b[k]; end
  end

  task automatic shot(input opcode_e op, input logic [5:0] a, input logic [5:0] b,
                      input logic [K-1:0] exp_a, input logic [K-1:0] exp_b, input int len);
    logic [K-1:0] max_a, max_b;
    int n;
    cmd_seen_a = '0; cmd_seen_b = '0; rvs_a = '0; rvs_b = '0;
    inst = '0; inst.op = op; inst.qsel = (op == OP_MEAS) ? 2'd0 : 2'd1; inst.params[0] = 16'h1111;
    addr_a = a; addr_b = b; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
    max_a = busy_a; max_b = busy_b;
    n = 0;
    while (busy_a != 0 || busy_b != 0) begin n++; @(negedge clk); if (n > 2000) break; end
    repeat (5) @(negedge clk);
    chk(max_a == exp_a, $sformatf("subID_ncBIT selected %b expected %b", max_a, exp_a));
    chk(max_b == exp_b, $sformatf("subBIT_ncID selected %b expected %b", max_b, exp_b));
    if (exp_a != 0 || exp_b != 0) chk(n == len, $sformatf("busy length %0d", n));
    if (op == OP_RZ) begin
      chk(cmd_seen_a == 0 && cmd_seen_b == 0, "virtual Z sends no pulse");
    end else if (op != OP_MEAS) begin
      chk(cmd_seen_a == exp_a, "commands subID_ncBIT");
      chk(cmd_seen_b == exp_b, "commands subBIT_ncID");
    end else begin
      chk(rvs_a == exp_a && rvs_b == exp_b, "measurement reports");
      chk((res_a & exp_a) == (meas_bit & exp_a), "measurement values subID_ncBIT");
      chk((res_b & exp_b) == (meas_bit & exp_b), "measurement values subBIT_ncID");
    end
  endtask

  initial begin
    inst_valid = 0; inst = '0; addr_a = '0; addr_b = '0; meas_bit = 4'b0110;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    //          subID: {sub ID, nc bitmap}   subBIT: {sub bitmap, nc ID}
    shot(OP_RX,   {2'd2, 4'b1010}, {4'b0100, 2'd3}, 4'b1010, 4'b1000, 62);
    shot(OP_RX,   {2'd1, 4'b1111}, {4'b1011, 2'd0}, 4'b0000, 4'b0000, 0);
    shot(OP_RZ,   {2'd2, 4'b1111}, {4'b1111, 2'd1}, 4'b1111, 4'b0010, 11);
    shot(OP_MEAS, {2'd2, 4'b0110}, {4'b0110, 2'd2}, 4'b0110, 4'b0100, 400);
    for (int i = 0; i < 20; i++) begin
      logic [1:0] sid, nid;
      logic [3:0] bm, sbm;
      sid = 2'($urandom); bm = 4'($urandom); sbm = 4'($urandom); nid = 2'($urandom);
      shot(OP_RX, {sid, bm}, {sbm, nid}, (sid == 2) ? bm : 4'b0, sbm[2] ? 4'(1) << nid : 4'b0, 62);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
