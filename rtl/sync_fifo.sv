// sync_fifo: single-clock first-in first-out queue of WIDTH-bit entries,
// DEPTH deep (a power of two). Standard valid/ready on both sides: a word is
// written when wr_valid && wr_ready and removed when rd_valid && rd_ready.
// rd_data shows the oldest entry whenever rd_valid is high. Storage is a
// plain register array. Used by the central controller as its instruction queue.
// The published design does not describe the central controller's
// instruction buffering; this queue is this implementation's choice.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data
);

  localparam int PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW:0]      wp, rp;

  assign wr_ready = (wp - rp) != (PW+1)'(DEPTH);
  assign rd_valid = wp != rp;
  assign rd_data  = mem[rp[PW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wp[PW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_valid && wr_ready) wp <= wp + 1'b1;
      if (rd_valid && rd_ready) rp <= rp + 1'b1;
    end
  end

endmodule
