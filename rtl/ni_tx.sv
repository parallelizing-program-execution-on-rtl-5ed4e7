// ni_tx: transmit side of the network interface between the central
// controller and the node controller network. It serializes one instruction
// onto LINK_W data wires, one word per clock cycle:
//   word 0             opcode word: {reserved, qsel[1:0], opcode[3:0]}
//   words 1 .. 1+delta instruction address, least significant word first
//   next nparams(op)   16-bit parameter words, parameter 0 first
// So an instruction occupies 2 + delta + nparams(op) cycles, the issue time
// of the published analysis (two cycles for opcode and SISD address, one per
// parameter, delta more for a wider address). The word order and the
// opcode-word layout are this implementation's choice.
//
// Handshake: an instruction is taken when in_valid && in_ready. Its words
// appear on link_data with link_valid high from the next cycle on, without
// gaps. in_ready is high when idle and in the cycle of the last word, so
// back-to-back instructions keep the link busy every cycle (pipelined issue).
// tx_last marks the last word of an instruction.
module ni_tx
  import qnet_pkg::*;
#(
  parameter int AW     = 15,  // instruction address width
  parameter int LINK_W = 16,  // data wires of the network interface (L)
  localparam int AWORDS = (AW + LINK_W - 1) / LINK_W,
  localparam int NWORDS = 1 + AWORDS + MAX_PARAMS,
  localparam int IDX_W  = $clog2(NWORDS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  inst_body_t        in_inst,
  input  logic [AW-1:0]     in_addr,
  output logic              link_valid,
  output logic [LINK_W-1:0] link_data,
  output logic              tx_last
);

  logic [NWORDS-1:0][LINK_W-1:0] pkt;
  logic [IDX_W-1:0]              idx, n_words;
  logic                          active;

  logic [NWORDS-1:0][LINK_W-1:0] pkt_new;
  logic [AWORDS*LINK_W-1:0]      addr_ext;

  always_comb begin
    addr_ext = (AWORDS*LINK_W)'(in_addr);
    pkt_new  = '0;
    pkt_new[0] = LINK_W'({in_inst.qsel, in_inst.op});
    for (int w = 0; w < AWORDS; w++) pkt_new[1+w] = addr_ext[w*LINK_W +: LINK_W];
    for (int p = 0; p < MAX_PARAMS; p++) pkt_new[1+AWORDS+p] = LINK_W'(in_inst.params[p]);
  end

  assign tx_last    = active && (idx == n_words - 1'b1);
  assign in_ready   = !active || tx_last;
  assign link_valid = active;
  assign link_data  = active ? pkt[idx] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      idx     <= '0;
      n_words <= '0;
      pkt     <= '0;
    end else if (in_valid && in_ready) begin
      active  <= 1'b1;
      idx     <= '0;
      n_words <= IDX_W'(1 + AWORDS + nparams(in_inst.op));
      pkt     <= pkt_new;
    end else if (tx_last) begin
      active <= 1'b0;
    end else if (active) begin
      idx <= idx + 1'b1;
    end
  end

endmodule
