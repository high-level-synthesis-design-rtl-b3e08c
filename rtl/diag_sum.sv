// diag_sum: fixed diagonal summing network for one beamforming cycle.
//
// Input is the delay stacked RF matrix of one cycle: F_SUB rows, row s being
// the RF row read for subaperture position s of this cycle (masked to zero
// when the entry is outside the active aperture). A pixel collects one sample
// per row along a diagonal: row s contributes channel m + s. Output p[i] is
// the diagonal that starts at channel m = i - (F_SUB-1), for m from
// -(F_SUB-1) to W_I-1, so every diagonal that touches the matrix is produced.
// Channels outside 0..W_I-1 contribute zero. The wiring is constant; only
// adders are used, no multipliers. Purely combinational.
module diag_sum
  import bf_pkg::*;
#(
  parameter int unsigned W_I   = 128,
  parameter int unsigned F_SUB = 8,
  localparam int unsigned PW   = SAMPLE_W + $clog2(F_SUB) + 1
) (
  input  sample_t [F_SUB-1:0][W_I-1:0]      rows,
  input  logic    [F_SUB-1:0]               en,
  output logic signed [W_I+F_SUB-2:0][PW-1:0] p
);
  always_comb begin
    for (int i = 0; i < W_I + F_SUB - 1; i++) begin
      logic signed [PW-1:0] acc;
      acc = '0;
      for (int s = 0; s < F_SUB; s++) begin
        int ch;
        ch = i - (F_SUB - 1) + s;
        if (ch >= 0 && ch < W_I && en[s]) acc = acc + PW'(rows[s][ch]);
      end
      p[i] = acc;
    end
  end
endmodule
