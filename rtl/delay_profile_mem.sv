// delay_profile_mem: on-chip copy of the compressed receive delay profile.
//
// After delay compression the delay of a pixel depends only on the depth row z
// and the relative lateral offset dx = x_n - x, so the whole profile for one
// steering angle is a D x F matrix of row indexes, shared by every pixel of a
// row. It is loaded once before beamforming and then read F_SUB entries per
// cycle: word z*K + k (K = F/F_SUB) holds entries k*F_SUB .. k*F_SUB+F_SUB-1 of
// depth z, which is what one cycle of the beamformer needs.
//
// Loading is a stream of words in address order. ld_restart is a pulse that
// sets the address back to zero (a word offered in the same cycle is
// ignored); the address also wraps after D*K words. While loading, the
// block records for every depth the smallest and largest enabled row index,
// the "dependent range" of that depth. The beamformer uses these bounds to
// know when all rows a depth needs are in its cyclic RF buffer and which rows
// may be overwritten. Recording the bounds at load time is this design's
// choice; the paper defines the dependent range but not how the hardware
// tracks it. A depth with no enabled entry gets the lower bound of the depth
// before it as both bounds.
//
// Reads: rd_data is registered (one-cycle latency, held while rd_en is low).
// bnd_lo/bnd_hi are a combinational read of the small bounds table.
module delay_profile_mem
  import bf_pkg::*;
#(
  parameter int unsigned F     = 64,
  parameter int unsigned F_SUB = 8,
  parameter int unsigned D     = 2560
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ld_restart,
  input  logic                       ld_valid,
  input  delay_t [F_SUB-1:0]         ld_data,
  output logic                       ld_done,     // D*K words loaded since restart
  input  logic                       rd_en,
  input  logic [$clog2(D*F/F_SUB)-1:0] rd_addr,
  output delay_t [F_SUB-1:0]         rd_data,
  input  logic [$clog2(D)-1:0]       bnd_z,
  output logic [IDX_W-1:0]           bnd_lo,
  output logic [IDX_W-1:0]           bnd_hi
);
  localparam int unsigned K     = F / F_SUB;
  localparam int unsigned WORDS = D * K;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned ZW    = $clog2(D);

  delay_t [F_SUB-1:0] mem   [WORDS];
  logic [IDX_W-1:0]   lo_mem [D];
  logic [IDX_W-1:0]   hi_mem [D];

  logic [AW-1:0]    wa_q;
  logic [KW-1:0]    wk_q;
  logic [ZW-1:0]    wz_q;
  logic [IDX_W-1:0] run_lo_q, run_hi_q, last_lo_q;
  logic             any_q;

  // min / max over the enabled entries of the incoming word, merged with the
  // running bounds of the current depth
  logic [IDX_W-1:0] w_lo, w_hi;
  logic             w_any;
  always_comb begin
    w_any = (wk_q != '0) && any_q;
    w_lo  = run_lo_q;
    w_hi  = run_hi_q;
    for (int s = 0; s < F_SUB; s++) begin
      if (ld_data[s].en) begin
        if (!w_any || ld_data[s].idx < w_lo) w_lo = ld_data[s].idx;
        if (!w_any || ld_data[s].idx > w_hi) w_hi = ld_data[s].idx;
        w_any = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid && !ld_restart) mem[wa_q] <= ld_data;
    if (ld_valid && wk_q == KW'(K - 1) && !ld_restart) begin
      lo_mem[wz_q] <= w_any ? w_lo : last_lo_q;
      hi_mem[wz_q] <= w_any ? w_hi : last_lo_q;
    end
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wa_q <= '0; wk_q <= '0; wz_q <= '0;
      run_lo_q <= '0; run_hi_q <= '0; last_lo_q <= '0; any_q <= 1'b0;
      ld_done <= 1'b0;
    end else if (ld_restart) begin
      wa_q <= '0; wk_q <= '0; wz_q <= '0;
      last_lo_q <= '0;
      ld_done <= 1'b0;
      any_q    <= 1'b0;
      run_lo_q <= '0;
      run_hi_q <= '0;
    end else if (ld_valid) begin
      run_lo_q <= w_lo;
      run_hi_q <= w_hi;
      any_q    <= w_any;
      if (wk_q == KW'(K - 1)) begin
        wk_q <= '0;
        last_lo_q <= w_any ? w_lo : last_lo_q;
        wz_q <= (wz_q == ZW'(D - 1)) ? '0 : wz_q + 1'b1;
      end else begin
        wk_q <= wk_q + 1'b1;
      end
      if (wa_q == AW'(WORDS - 1)) begin
        wa_q    <= '0;
        ld_done <= 1'b1;
      end else begin
        wa_q <= wa_q + 1'b1;
      end
    end
  end

  assign bnd_lo = lo_mem[bnd_z];
  assign bnd_hi = hi_mem[bnd_z];
endmodule
