// central_controller: issues the compiled physical instruction stream to the
// node controller network and enforces the node controller dependency.
//
// Instructions (opcode, qubit, parameters and a {subnet, node controller}
// address already marked for parallel execution by the compiler) enter a
// FIFO. The instruction at its head is decoded into the set of node
// controllers it targets. It is handed to the network transmitter only when
// none of them is busy and none of them is the target of an instruction
// still travelling through the interface. Hence:
//   - serial sequence (same node): the next instruction waits for the
//     previous one's issue and execution to finish;
//   - pipelined sequence (different nodes): instructions follow each other
//     back to back on the link, overlapping execution;
//   - parallel sequence: one instruction with a multi-target address.
// In-flight tracking: mask_tx holds the targets of the instruction being
// serialized, mask_rx those of the instruction just delivered, until the
// node controllers' busy flags are visible (two cycles after the last word).
// The controller also records the outcome of every measurement per node.
// stall_cycles counts cycles in which the head instruction was held back by
// a dependency. The FIFO depth and the program-flow interface (a plain
// instruction stream) are this implementation's choices.
module central_controller
  import qnet_pkg::*;
#(
  parameter enc_scheme_e ENC        = SUBID_NCBIT,
  parameter int          M          = 128,
  parameter int          K          = 8,
  parameter int          LINK_W     = 16,
  parameter int          FIFO_DEPTH = 16,
  localparam int         N          = M * K,
  localparam int         AW         = addr_bits(ENC, M, K)
) (
  input  logic              clk,
  input  logic              rst_n,
  // compiled instruction stream
  input  logic              in_valid,
  output logic              in_ready,
  input  inst_body_t        in_inst,
  input  logic [AW-1:0]     in_addr,
  // network interface link
  output logic              link_valid,
  output logic [LINK_W-1:0] link_data,
  // status from the node controllers (index s*K + k)
  input  logic [N-1:0]      nc_busy,
  input  logic [N-1:0]      nc_res_valid,
  input  logic [N-1:0]      nc_res_bit,
  // results and status
  output logic [N-1:0]      meas_result,
  output logic [N-1:0]      meas_seen,
  output logic              idle,
  output logic [31:0]       issued,
  output logic [31:0]       stall_cycles
);

  localparam int EW = $bits(inst_body_t) + AW;

  logic          q_valid, q_ready;
  logic [EW-1:0] q_data;
  inst_body_t    head_inst;
  logic [AW-1:0] head_addr;
  logic [N-1:0]  head_mask, mask_tx, mask_rx;
  logic          hazard, tx_ready, tx_last, issue;

  sync_fifo #(.WIDTH(EW), .DEPTH(FIFO_DEPTH)) u_queue (
    .clk, .rst_n,
    .wr_valid(in_valid), .wr_ready(in_ready), .wr_data({in_inst, in_addr}),
    .rd_valid(q_valid), .rd_ready(q_ready), .rd_data(q_data)
  );

  assign {head_inst, head_addr} = q_data;

  target_decoder #(.ENC(ENC), .M(M), .K(K)) u_tdec (.addr(head_addr), .mask(head_mask));

  assign hazard  = |(head_mask & (nc_busy | mask_tx | mask_rx));
  assign issue   = q_valid && tx_ready && !hazard;
  assign q_ready = issue;

  ni_tx #(.AW(AW), .LINK_W(LINK_W)) u_tx (
    .clk, .rst_n,
    .in_valid(q_valid && !hazard), .in_ready(tx_ready),
    .in_inst(head_inst), .in_addr(head_addr),
    .link_valid, .link_data, .tx_last
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_tx      <= '0;
      mask_rx      <= '0;
      issued       <= '0;
      stall_cycles <= '0;
      meas_result  <= '0;
      meas_seen    <= '0;
    end else begin
      // targets of the instruction in the transmitter
      if (issue)        mask_tx <= head_mask;
      else if (tx_last) mask_tx <= '0;
      // targets of the instruction whose last word just left, until busy shows
      mask_rx <= tx_last ? mask_tx : '0;
      if (issue) issued <= issued + 1;
      if (q_valid && hazard) stall_cycles <= stall_cycles + 1;
      for (int n = 0; n < N; n++)
        if (nc_res_valid[n]) begin
          meas_result[n] <= nc_res_bit[n];
          meas_seen[n]   <= 1'b1;
        end
    end
  end

  assign idle = !q_valid && !link_valid && (mask_rx == '0) && (nc_busy == '0);

endmodule
