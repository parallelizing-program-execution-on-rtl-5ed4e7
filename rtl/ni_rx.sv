// ni_rx: receive side of the network interface. It reassembles the word
// stream produced by ni_tx (opcode word, address words, parameter words) and
// broadcasts the complete instruction to every subnet of the network.
//
// The opcode in word 0 tells how many parameter words follow, so no framing
// wire beyond link_valid is needed. The reassembled instruction appears on
// inst / inst_addr with a one-cycle inst_valid strobe in the cycle after its
// last word; a new instruction may start in that same cycle.
module ni_rx
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
  input  logic              link_valid,
  input  logic [LINK_W-1:0] link_data,
  output logic              inst_valid,
  output inst_body_t        inst,
  output logic [AW-1:0]     inst_addr
);

  logic [IDX_W-1:0]              idx, n_words;
  logic [NWORDS-1:0][LINK_W-1:0] buf_q;
  logic [NWORDS-1:0][LINK_W-1:0] pkt;
  logic [AWORDS*LINK_W-1:0]      addr_ext;
  opcode_e                       op_now;
  logic [IDX_W-1:0]              n_now;
  logic                          last_now;

  // Word 0 carries the opcode; the length of the current packet follows from it.
  assign op_now   = opcode_e'(link_data[3:0]);
  assign n_now    = (idx == '0) ? IDX_W'(1 + AWORDS + nparams(op_now)) : n_words;
  assign last_now = link_valid && (idx == n_now - 1'b1);

  always_comb begin
    pkt = buf_q;
    pkt[idx] = link_data;
    for (int w = 0; w < AWORDS; w++) addr_ext[w*LINK_W +: LINK_W] = pkt[1+w];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx        <= '0;
      n_words    <= '0;
      buf_q      <= '0;
      inst_valid <= 1'b0;
      inst       <= '0;
      inst_addr  <= '0;
    end else begin
      inst_valid <= 1'b0;
      if (link_valid) begin
        buf_q[idx] <= link_data;
        if (idx == '0) n_words <= n_now;
        if (last_now) begin
          idx        <= '0;
          inst_valid <= 1'b1;
          inst.op    <= opcode_e'(pkt[0][3:0]);
          inst.qsel  <= pkt[0][4 +: QSEL_W];
          for (int p = 0; p < MAX_PARAMS; p++)
            inst.params[p] <= (p < nparams(opcode_e'(pkt[0][3:0])))
                              ? param_t'(pkt[1+AWORDS+p]) : param_t'(0);
          inst_addr  <= addr_ext[AW-1:0];
          buf_q      <= '0;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

endmodule
