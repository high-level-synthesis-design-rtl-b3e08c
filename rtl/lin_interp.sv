// lin_interp: x2 linear interpolation of RF rows along fast time.
//
// A row is one fast-time sample from every receive channel (W_I samples). The
// block keeps the previous and the current raw row and emits, for raw rows
// r0, r1, ..., r(D_RAW-1) of a frame, the interpolated stream
//   r0, (r0+r1)/2, r1, (r1+r2)/2, ..., r(D_RAW-1), r(D_RAW-1)
// i.e. the mean row is placed between the two raw rows it comes from, so a
// frame of D_RAW raw rows becomes 2*D_RAW rows. The mean of two rows is their
// sum shifted right by one (floor). The last output row of a frame repeats the
// last raw row because there is no following row to average with; that, the
// rounding and the valid/ready handshakes are this design's choices, the
// two-row buffer and the mean are as described for the beamformer.
//
// Interface: in_* and out_* are valid/ready row streams (a transfer happens
// when both are high). in_ready does not depend on in_valid. Each raw row is
// accepted in one cycle and its one or two output rows follow on the next
// cycles, so the block sustains one raw row per three cycles.
module lin_interp
  import bf_pkg::*;
#(
  parameter int unsigned W_I   = 128,   // receive channels
  parameter int unsigned D_RAW = 1280   // raw rows per frame
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  sample_t [W_I-1:0]    in_row,
  output logic                 out_valid,
  input  logic                 out_ready,
  output sample_t [W_I-1:0]    out_row
);
  typedef enum logic [1:0] {P_NONE, P_MID, P_CUR, P_TAIL} pend_e;

  pend_e                      pend;
  sample_t [W_I-1:0]          prev_q, cur_q;
  logic [$clog2(D_RAW+1)-1:0] idx_q;   // frame index of the next raw row to arrive

  sample_t [W_I-1:0] mid;
  always_comb begin
    for (int c = 0; c < W_I; c++) begin
      logic signed [SAMPLE_W:0] s;
      s = {prev_q[c][SAMPLE_W-1], prev_q[c]} + {cur_q[c][SAMPLE_W-1], cur_q[c]};
      mid[c] = sample_t'(s >>> 1);
    end
  end

  assign in_ready  = (pend == P_NONE);
  assign out_valid = (pend != P_NONE);
  assign out_row   = (pend == P_MID) ? mid : cur_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend  <= P_NONE;
      idx_q <= '0;
      prev_q <= '0;
      cur_q  <= '0;
    end else begin
      if (in_valid && in_ready) begin
        prev_q <= cur_q;
        cur_q  <= in_row;
        pend <= (idx_q == '0) ? P_CUR : P_MID;
      end else if (out_valid && out_ready) begin
        unique case (pend)
          P_MID:  pend <= P_CUR;
          P_CUR:  pend <= (idx_q == ($bits(idx_q))'(D_RAW - 1)) ? P_TAIL : P_NONE;
          P_TAIL: pend <= P_NONE;
          default: pend <= P_NONE;
        endcase
        if (pend == P_CUR && idx_q != ($bits(idx_q))'(D_RAW - 1)) idx_q <= idx_q + 1'b1;
        if (pend == P_TAIL) idx_q <= '0;
      end
    end
  end
endmodule
