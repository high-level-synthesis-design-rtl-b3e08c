// sdp_ram: simple dual-port RAM, one write port and one registered read port.
//
// This is the "simple two-port" block RAM the transmit delay compensation is
// built from. A read and a write to the same address in the same cycle return
// the old contents (read-first), which the delay compensation relies on for a
// channel whose FIFO is exactly DEPTH entries long. The read register holds its
// value while re is low. Contents are not reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
