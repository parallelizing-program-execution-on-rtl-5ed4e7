// tb_qnet_top: end-to-end test of the network in three reduced
// configurations, one per address encoding scheme:
//   subID_ncBIT  16 nodes, 4 subnets of 4   (W_S, W_NC) = (2, 4), delta 0
//   subBIT_ncID  16 nodes, 4 subnets of 4   (4, 2), delta 0, nodes spread over subnets
//   subBIT_ncBIT 128 nodes, 16 subnets of 8 (16, 8), delta 1 (two address words)
// Each runs the harness sequence (parallel, pipelined and serial sequences,
// virtual Z, measurement, entanglement) and every mechanism must occur.
// Run times are checked against the published run-time expressions plus
// this implementation's receiver stage and serial turnaround cycles.
module tb_qnet_top;
  import qnet_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int c[3], f[3], np[3], npl[3], ns[3], nmw[3], nvz[3], nm[3], ne[3];
  bit fin[3];

  localparam enc_scheme_e CFG_ENC [3] = '{SUBID_NCBIT, SUBBIT_NCID, SUBBIT_NCBIT};
  localparam int          CFG_N   [3] = '{16, 16, 128};
  localparam int          CFG_M   [3] = '{4, 4, 16};

  for (genvar i = 0; i < 3; i++) begin : g_cfg
    localparam enc_scheme_e ENC = CFG_ENC[i];
    localparam int N  = CFG_N[i];
    localparam int M  = CFG_M[i];
    localparam int AW = addr_bits(ENC, M, N / M);

    logic          rst_n, in_valid, in_ready, idle, link_valid;
    inst_body_t    in_inst;
    logic [AW-1:0] in_addr;
    qci_cmd_t      cmd [N];
    logic [N-1:0]  meas_bit, node_busy, node_done, meas_result, meas_seen;
    logic [31:0]   issued, stall_cycles;
    logic [15:0]   link_data;

    qnet_top #(.ENC(ENC), .N_NODES(N), .N_SUBNETS(M)) dut (.*);

    tb_qnet_harness #(.ENC(ENC), .N_NODES(N), .N_SUBNETS(M)) h (
      .clk, .rst_n, .in_valid, .in_ready, .in_inst, .in_addr, .cmd, .meas_bit, .node_busy,
      .meas_result, .meas_seen, .idle, .stall_cycles, .issued, .link_valid,
      .checks(c[i]), .failures(f[i]), .finished(fin[i]), .n_parallel(np[i]), .n_pipelined(npl[i]),
      .n_stall(ns[i]), .n_multiword(nmw[i]), .n_vz(nvz[i]), .n_meas(nm[i]), .n_ent(ne[i]));
  end

  int checks, failures;

  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  initial begin
    int cyc;
    cyc = 0;
    while (!(fin[0] && fin[1] && fin[2]) && cyc < 40000) begin @(posedge clk); cyc++; end
    checks = c[0] + c[1] + c[2];
    failures = f[0] + f[1] + f[2];
    if (!(fin[0] && fin[1] && fin[2])) begin failures++; $display("FAIL watchdog"); end
    mech("parallel instruction",        np[0] + np[1] + np[2]);
    mech("pipelined issue",             npl[0] + npl[1] + npl[2]);
    mech("dependency stall (cycles)",   ns[0] + ns[1] + ns[2]);
    mech("multi-word address (delta>0)", nmw[2]);
    mech("virtual Z",                   nvz[0] + nvz[1] + nvz[2]);
    mech("measurement returned",        nm[0] + nm[1] + nm[2]);
    mech("entangle",                    ne[0] + ne[1] + ne[2]);
    mech("subID_ncBIT parallel",        np[0]);
    mech("subBIT_ncID parallel",        np[1]);
    mech("subBIT_ncBIT parallel",       np[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
