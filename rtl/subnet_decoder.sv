// subnet_decoder: first level of the two-level address decode. One instance
// sits in front of each subnet and decides whether the instruction on the
// broadcast bus is meant for that subnet.
//
// The address vector is {subnet address, node controller address}, subnet
// address in the upper bits. With an ID-encoded subnet address (subID_ncBIT)
// the subnet is selected when the ID equals SUB_IDX; with a bitmap-encoded
// subnet address (subBIT_ncID, subBIT_ncBIT) bit SUB_IDX of the subnet
// bitmap selects it. A subnet address of zero width (a single subnet) always
// selects. Purely combinational; the node controller registers the result.
//
// The ID and bitmap decode rules and the upper position of the subnet address
// follow the published design; the zero-width case is this implementation's
// handling of the single-subnet modes.
module subnet_decoder
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC     = SUBID_NCBIT,
  parameter int          M       = 128,  // number of subnets
  parameter int          K       = 8,    // node controllers per subnet
  parameter int          SUB_IDX = 0,    // index of the subnet this decoder guards
  localparam int         WS      = subnet_addr_bits(ENC, M),
  localparam int         WNC     = nc_addr_bits(ENC, K),
  localparam int         AW      = addr_bits(ENC, M, K)
) (
  input  logic [AW-1:0] addr,
  output logic          sel
);

  logic [AW-1:0] sub_field;
  assign sub_field = addr >> WNC;

  if (WS == 0) begin : g_single
    assign sel = 1'b1;
  end else if (ENC == SUBID_NCBIT) begin : g_id
    assign sel = sub_field[WS-1:0] == WS'(SUB_IDX);
  end else begin : g_bitmap
    assign sel = sub_field[SUB_IDX];
  end

endmodule
