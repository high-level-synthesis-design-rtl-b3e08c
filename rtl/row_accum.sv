// row_accum: align and sum of the partially beamformed rows.
//
// A depth is beamformed in K = F/F_SUB cycles. Cycle k covers subaperture
// positions j = k*F_SUB .. k*F_SUB+F_SUB-1, where position j stands for the
// lateral offset dx = j - F/2 (in element pitches) between receive element
// and pixel, so pixel x takes channel x + j - F/2 from row j. The diagonal
// sums p[] of cycle k are therefore shifted by k*F_SUB - F/2 before they are
// added into the row: acc[x] += p[x + k*F_SUB - F/2 + F_SUB - 1]. Diagonals
// outside p contribute zero. Centring the offsets on F/2 is this design's
// choice of indexing.
//
// Interface: when en and in_valid are high the partial row is taken; k = 0
// starts a new sum. With in_last the finished row goes to out_row and
// out_valid rises; out_valid falls when out_ready is seen. The caller stops
// (en low) while a finished row is waiting and would be overwritten.
module row_accum
  import bf_pkg::*;
#(
  parameter int unsigned W_I   = 128,
  parameter int unsigned F     = 64,
  parameter int unsigned F_SUB = 8,
  localparam int unsigned PW   = SAMPLE_W + $clog2(F_SUB) + 1,
  localparam int unsigned OW   = SAMPLE_W + $clog2(F) + 1,
  localparam int unsigned K    = F / F_SUB,
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 en,
  input  logic                                 in_valid,
  input  logic [KW-1:0]                        in_k,
  input  logic                                 in_last,
  input  logic signed [W_I+F_SUB-2:0][PW-1:0]  p,
  output logic                                 out_valid,
  input  logic                                 out_ready,
  output logic signed [W_I-1:0][OW-1:0]        out_row
);
  logic signed [W_I-1:0][OW-1:0] acc_q, acc_n;

  always_comb begin
    for (int x = 0; x < W_I; x++) begin
      int i;
      logic signed [OW-1:0] a;
      i = x + int'(in_k) * F_SUB - F / 2 + F_SUB - 1;
      a = (i >= 0 && i < W_I + F_SUB - 1) ? OW'($signed(p[i])) : '0;
      acc_n[x] = ((in_k == '0) ? '0 : acc_q[x]) + a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_row   <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (en && in_valid) begin
        acc_q <= acc_n;
        if (in_last) begin
          out_row   <= acc_n;
          out_valid <= 1'b1;
        end
      end
    end
  end
endmodule
