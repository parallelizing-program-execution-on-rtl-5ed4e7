// tb_subnet_decoder: exhaustive check of the first-level (subnet) decoder.
// For each of the three encoding schemes, M = 4 subnets of K = 4 node
// controllers, one decoder per subnet is instantiated and every address
// value is applied. The expected select is worked out here from the scheme's
// definition: ID scheme - upper log2(M) address bits equal the subnet index;
// bitmap schemes - bit (WNC + index) of the address is set.
// The selection rules are the published encoding schemes.
module tb_subnet_decoder;
  import qnet_pkg::*;

  localparam int M = 4, K = 4;
  // address widths: subID_ncBIT 2+4, subBIT_ncID 4+2, subBIT_ncBIT 4+4
  localparam int AW0 = 6, AW1 = 6, AW2 = 8;

  int checks = 0, failures = 0;
  logic [7:0] a;
  logic [M-1:0] sel0, sel1, sel2;
  logic clk = 0;
  always #5 clk = ~clk;

  for (genvar s = 0; s < M; s++) begin : g
    subnet_decoder #(.ENC(SUBID_NCBIT),  .M(M), .K(K), .SUB_IDX(s)) u0 (.addr(a[AW0-1:0]), .sel(sel0[s]));
    subnet_decoder #(.ENC(SUBBIT_NCID),  .M(M), .K(K), .SUB_IDX(s)) u1 (.addr(a[AW1-1:0]), .sel(sel1[s]));
    subnet_decoder #(.ENC(SUBBIT_NCBIT), .M(M), .K(K), .SUB_IDX(s)) u2 (.addr(a[AW2-1:0]), .sel(sel2[s]));
  end

  // single-subnet mode (0, K): the subnet address has no bits and always selects
  logic sel_single;
  subnet_decoder #(.ENC(SUBID_NCBIT), .M(1), .K(8), .SUB_IDX(0)) u_single (.addr(a), .sel(sel_single));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s addr=%b got=%b exp=%b", what, a, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      a = 8'(v);
      #1;
      for (int s = 0; s < M; s++) begin
        check(sel0[s], (v >> 4) % 4 == s, "subID_ncBIT");
        check(sel1[s], ((v % 64) >> 2) & (1 << s) ? 1'b1 : 1'b0, "subBIT_ncID");
        check(sel2[s], (v >> (4 + s)) & 1 ? 1'b1 : 1'b0, "subBIT_ncBIT");
      end
      check(sel_single, 1'b1, "single subnet");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
