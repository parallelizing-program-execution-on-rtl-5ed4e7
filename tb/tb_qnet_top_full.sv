// tb_qnet_top_full: the end-to-end sequence of tb_qnet_harness on qnet_top
// with every parameter at its default: 1024 node controllers, subID_ncBIT,
// 128 subnets of 8, a 16-wire link (addressing mode (7, 8), delta 0).
// Run times are checked against the published run-time expressions plus
// this implementation's receiver stage and serial turnaround cycles.
module tb_qnet_top_full;
  import qnet_pkg::*;

  localparam int N = 1024, M = 128, AW = 15;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          rst_n, in_valid, in_ready, idle, link_valid;
  inst_body_t    in_inst;
  logic [AW-1:0] in_addr;
  qci_cmd_t      cmd [N];
  logic [N-1:0]  meas_bit, node_busy, node_done, meas_result, meas_seen;
  logic [31:0]   issued, stall_cycles;
  logic [15:0]   link_data;

  qnet_top dut (.*);

  int  checks, failures, np, npl, ns, nmw, nvz, nm, ne;
  bit  fin;

  tb_qnet_harness #(.ENC(SUBID_NCBIT), .N_NODES(N), .N_SUBNETS(M)) h (
    .clk, .rst_n, .in_valid, .in_ready, .in_inst, .in_addr, .cmd, .meas_bit, .node_busy,
    .meas_result, .meas_seen, .idle, .stall_cycles, .issued, .link_valid,
    .checks, .failures, .finished(fin), .n_parallel(np), .n_pipelined(npl),
    .n_stall(ns), .n_multiword(nmw), .n_vz(nvz), .n_meas(nm), .n_ent(ne));

  initial begin
    int cyc, f;
    cyc = 0;
    while (!fin && cyc < 40000) begin @(posedge clk); cyc++; end
    f = failures;
    if (!fin) begin f++; $display("FAIL watchdog"); end
    $display("parallel=%0d pipelined=%0d stall_cycles=%0d virtual_z=%0d measured=%0d entangle=%0d",
             np, npl, ns, nvz, nm, ne);
    if (np == 0 || npl == 0 || ns == 0 || nvz == 0 || nm == 0 || ne == 0) begin
      f++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, f);
    $finish;
  end
endmodule
