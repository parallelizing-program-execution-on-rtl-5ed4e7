// target_decoder: the complete two-level address decode in one place. It
// combines M subnet_decoders and one nc_decoder and returns the set of node
// controllers an address selects, one bit per controller, bit s*K + k for
// local controller k of subnet s. The central controller uses it to find the
// node controllers an instruction will occupy before it issues it.
// Purely combinational.
// It reuses the same decoder modules as the subnets, so the central
// controller and the network always agree on the targets; doing the decode
// centrally for the dependency check is this implementation's choice.
module target_decoder
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC = SUBID_NCBIT,
  parameter int          M   = 128,
  parameter int          K   = 8,
  localparam int         AW  = addr_bits(ENC, M, K)
) (
  input  logic [AW-1:0]  addr,
  output logic [M*K-1:0] mask
);

  logic [M-1:0] sub_sel;
  logic [K-1:0] nc_sel;

  for (genvar s = 0; s < M; s++) begin : g_sub
    subnet_decoder #(.ENC(ENC), .M(M), .K(K), .SUB_IDX(s)) u_sdec (.addr(addr), .sel(sub_sel[s]));
    assign mask[s*K +: K] = sub_sel[s] ? nc_sel : '0;
  end

  nc_decoder #(.ENC(ENC), .M(M), .K(K)) u_ndec (.addr(addr), .sel(nc_sel));

endmodule
