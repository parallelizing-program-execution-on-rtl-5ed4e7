// subnet: one group of K node controllers behind one first-level decoder.
// The instruction broadcast by the network receiver reaches every subnet; the
// subnet_decoder decides whether this subnet is addressed and the nc_decoder
// which of its node controllers are. Node controller k is selected when both
// agree. Apart from the decoders the subnet only fans the broadcast out to
// its controllers and gathers their status.
//
// The grouping of K controllers behind a subnet decoder follows the published
// two-level network; the AND of the two selects is the simplest way to
// cascade them and is this implementation's choice.
module subnet
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC      = SUBID_NCBIT,
  parameter int          M        = 128,
  parameter int          K        = 8,
  parameter int          SUB_IDX  = 0,
  parameter int          N_QUBITS = 3,
  localparam int         AW       = addr_bits(ENC, M, K)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          inst_valid,
  input  inst_body_t    inst,
  input  logic [AW-1:0] inst_addr,
  output logic [K-1:0]  busy,
  output logic [K-1:0]  done,
  output logic [K-1:0]  res_valid,
  output logic [K-1:0]  res_bit,
  output qci_cmd_t      cmd [K],
  input  logic [K-1:0]  meas_bit
);

  logic         sub_sel;
  logic [K-1:0] nc_sel;

  subnet_decoder #(.ENC(ENC), .M(M), .K(K), .SUB_IDX(SUB_IDX)) u_sdec (.addr(inst_addr), .sel(sub_sel));
  nc_decoder     #(.ENC(ENC), .M(M), .K(K))                    u_ndec (.addr(inst_addr), .sel(nc_sel));

  for (genvar k = 0; k < K; k++) begin : g_nc
    node_controller #(.N_QUBITS(N_QUBITS)) u_nc (
      .clk, .rst_n,
      .inst_valid, .inst, .sel(sub_sel && nc_sel[k]),
      .busy(busy[k]), .done(done[k]), .res_valid(res_valid[k]), .res_bit(res_bit[k]),
      .cmd(cmd[k]), .meas_bit(meas_bit[k])
    );
  end

endmodule
