// tb_nc_decoder: checks the second-level (node controller) decoder.
// First the two examples of ID and bitmap addressing of 16 node controllers:
// the ID 1011b selects controller 11 only, and the bitmap
// 0010100110110111b selects controllers 0, 1, 2, 4, 5, 7, 8, 11 and 13
// (bit k selects controller k). Then random addresses against a reference
// decode written here, and the one-controller-per-subnet mode (W_NC = 0).
// The two examples are the published illustrations of ID and bitmap
// addressing; the random part checks the same rules.
module tb_nc_decoder;
  import qnet_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  // K = 16 in one subnet pair: subID_ncBIT address 1 + 16 bits, subBIT_ncID 2 + 4 bits
  logic [16:0] a_bit;
  logic [5:0]  a_id;
  logic [15:0] sel_bit, sel_id;
  logic [2:0]  a_one;
  logic [0:0]  sel_one;

  nc_decoder #(.ENC(SUBID_NCBIT), .M(2), .K(16)) u_bit (.addr(a_bit), .sel(sel_bit));
  nc_decoder #(.ENC(SUBBIT_NCID), .M(2), .K(16)) u_id  (.addr(a_id),  .sel(sel_id));
  nc_decoder #(.ENC(SUBBIT_NCID), .M(3), .K(1))  u_one (.addr(a_one), .sel(sel_one));

  task automatic check16(input logic [15:0] got, input logic [15:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%b exp=%b", what, got, exp);
    end
  endtask

  initial begin
    // ID example: 1011b -> controller 11
    a_id = {2'b01, 4'b1011}; a_bit = '0; a_one = '0;
    #1 check16(sel_id, 16'h0800, "ID example 1011b");
    // bitmap example
    a_bit = {1'b0, 16'b0010100110110111};
    #1 check16(sel_bit, 16'((1<<0)|(1<<1)|(1<<2)|(1<<4)|(1<<5)|(1<<7)|(1<<8)|(1<<11)|(1<<13)),
               "bitmap example");
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] bm;
      logic [3:0]  id;
      bm = 16'($urandom);
      id = 4'($urandom);
      a_bit = {1'($urandom), bm};
      a_id  = {2'($urandom), id};
      a_one = 3'($urandom);
      #1;
      check16(sel_bit, bm, "bitmap random");
      check16(sel_id, 16'(1) << id, "ID random");
      check16(16'(sel_one), 16'd1, "single node");
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
