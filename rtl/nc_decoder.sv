// nc_decoder: second level of the two-level address decode. It turns the
// node controller address (the low WNC bits of the instruction address) into
// one select line per node controller of a subnet.
//
// With a bitmap-encoded node controller address (subID_ncBIT, subBIT_ncBIT)
// bit k selects local controller k; with an ID-encoded address
// (subBIT_ncID) only the controller whose index equals the ID is selected.
// A zero-width address (one controller per subnet) selects it always.
// Purely combinational.
//
// The decode rules follow the published design, including its examples (ID
// 1011b selects controller 11; bit k of a bitmap selects controller k). In
// the default subID_ncBIT mode the bitmap decode is plain wiring: the select
// lines are the address bits themselves, and only the ID scheme needs gates.
module nc_decoder
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC = SUBID_NCBIT,
  parameter int          M   = 128,  // number of subnets (sets the address layout)
  parameter int          K   = 8,    // node controllers per subnet
  localparam int         WNC = nc_addr_bits(ENC, K),
  localparam int         AW  = addr_bits(ENC, M, K)
) (
  input  logic [AW-1:0] addr,
  output logic [K-1:0]  sel
);

  if (WNC == 0) begin : g_single
    assign sel = '1;
  end else if (ENC == SUBBIT_NCID) begin : g_id
    always_comb
      for (int k = 0; k < K; k++) sel[k] = addr[WNC-1:0] == WNC'(k);
  end else begin : g_bitmap
    assign sel = addr[K-1:0];
  end

endmodule
