// rf_buffer: cyclic channel RF buffer.
//
// Holds the last MDR rows (one sample per receive channel each) of the
// transmit-compensated RF data. Only the rows a depth can depend on are kept,
// so the buffer is MDR rows deep instead of a whole frame, and both ports take
// a row position and reduce it modulo MDR on the way to the memory (the core
// passes the row's position in the input stream). One
// write port and one read port; the beamformer keeps F_SUB identical copies so
// that F_SUB rows can be read in one cycle.
//
// Timing: writes take effect at the clock edge; rd_row is registered (one
// cycle after rd_en, held while rd_en is low). The caller guarantees that a
// row being read is not overwritten in the same cycle. Contents are not reset.
module rf_buffer
  import bf_pkg::*;
#(
  parameter int unsigned W_I = 128,
  parameter int unsigned MDR = 150
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_idx,
  input  sample_t [W_I-1:0] wr_row,
  input  logic              rd_en,
  input  logic [IDX_W-1:0]  rd_idx,
  output sample_t [W_I-1:0] rd_row
);
  localparam int unsigned AW = (MDR > 1) ? $clog2(MDR) : 1;

  sample_t [W_I-1:0] mem [MDR];

  logic [AW-1:0] wa, ra;
  assign wa = AW'(wr_idx % IDX_W'(MDR));
  assign ra = AW'(rd_idx % IDX_W'(MDR));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa] <= wr_row;
    if (rd_en) rd_row <= mem[ra];
  end
endmodule
