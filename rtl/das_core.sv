// das_core: one delay-and-sum beamformer for steered plane-wave imaging.
//
// Every pixel of a depth row uses the same F delay indexes (delay reuse), and
// each index selects a whole RF row, one sample per channel (vectorised
// fetch). Stacking the F selected rows and summing along diagonals yields all
// W_I pixels of the depth at once. With F_SUB read ports the F rows are taken
// F_SUB at a time, so a depth costs K = F/F_SUB cycles:
//
//   issue   read word z*K+k of the delay profile (F_SUB indexes)
//   stage 1 each of the F_SUB cyclic RF buffers reads the row its index names
//   stage 2 diag_sum forms the diagonal sums of the F_SUB-row stacked matrix
//   stage 3 row_accum shifts them by k*F_SUB and adds them into the row;
//           after k = K-1 the beamformed row is output
//
// The F_SUB RF buffers hold identical data: every incoming row is written to
// all of them, at the stream row index modulo MDR. Flow control is this
// design's own: depth z is issued once a complete profile is loaded and the
// row named by its largest index has been written, and a row is accepted only while its frame index r satisfies
// r < lo + MDR, where lo is the smallest index of the depth being read, so no
// row still needed is overwritten. This requires the per-depth lower bounds
// to be non-decreasing and every dependent range to be shorter than MDR,
// which is how MDR is defined. Frames follow each other without a gap: row
// indexes are kept relative to the frame being issued (wr_rel), so the rows
// of the next frame are written while the last depths of a frame are still
// being formed, and a read address is the frame's base position in the
// buffer plus the delay index. Every frame must bring exactly D rows.
//
// Interface: delay-profile load stream (see delay_profile_mem), valid/ready
// row streams for RF rows in and beamformed rows out (OW-bit signed sums).
// in_ready never depends on in_valid. With input rows arriving in time a
// depth leaves every K cycles, across frame boundaries too; the pipeline adds
// 4 cycles of latency. frame_done pulses when the last depth of a frame has
// been issued (its row leaves 4 cycles later). Requires D + MDR < 2**IDX_W.
module das_core
  import bf_pkg::*;
#(
  parameter int unsigned W_I   = 128,
  parameter int unsigned F     = 64,
  parameter int unsigned F_SUB = 8,
  parameter int unsigned D     = 2560,
  parameter int unsigned MDR   = 150,
  localparam int unsigned OW   = SAMPLE_W + $clog2(F) + 1,
  localparam int unsigned K    = F / F_SUB,
  localparam int unsigned DAW  = $clog2(D * K)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // delay profile loading
  input  logic                          ld_restart,
  input  logic                          ld_valid,
  input  delay_t [F_SUB-1:0]            ld_data,
  output logic                          ld_done,
  // transmit-compensated RF rows
  input  logic                          in_valid,
  output logic                          in_ready,
  input  sample_t [W_I-1:0]             in_row,
  // beamformed rows
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic signed [W_I-1:0][OW-1:0] out_row,
  output logic                          frame_done
);
  localparam int unsigned PW = SAMPLE_W + $clog2(F_SUB) + 1;
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned ZW = $clog2(D);
  localparam int unsigned RW = IDX_W + 2;   // signed row index, holds any delay index
  localparam int unsigned BW = $clog2(MDR);
  localparam logic signed [RW-1:0] D_S   = RW'(D);
  localparam logic signed [RW-1:0] MDR_S = RW'(MDR);

  logic [ZW-1:0]          z_q;
  logic [KW-1:0]          k_q;
  logic signed [RW-1:0]   wr_rel_q;   // rows written, relative to the issuing frame
  logic [BW-1:0]          wr_ptr_q;   // buffer position of the next row
  logic [BW-1:0]          base_q;     // buffer position of the issuing frame's row 0
  logic [BW-1:0]          s1_base;
  logic signed [RW-1:0]   cur_lo_q;   // lower bound of the depth being issued
  logic signed [RW-1:0]   s1_lo;      // lower bound of the depth in stage 1
  logic signed [RW-1:0]   guard_lo;

  logic             s1_v, s1_last, s2_v, s2_last, s3_v, s3_last;
  logic [KW-1:0]    s1_k, s2_k, s3_k;
  logic [F_SUB-1:0] s2_en;
  logic signed [W_I+F_SUB-2:0][PW-1:0] s3_p;

  logic             adv, rows_ok, issue, frame_sw, wr;
  logic [IDX_W-1:0] bnd_lo, bnd_hi;
  delay_t [F_SUB-1:0]            dly;
  sample_t [F_SUB-1:0][W_I-1:0]  rf_rows;
  logic signed [W_I+F_SUB-2:0][PW-1:0] p;

  assign adv      = !(out_valid && !out_ready);
  assign rows_ok  = (wr_rel_q >= D_S) || (wr_rel_q > $signed({2'b00, bnd_hi}));
  assign issue    = adv && ld_done && ((k_q != '0) || rows_ok);
  assign frame_sw = issue && (k_q == KW'(K - 1)) && (z_q == ZW'(D - 1));
  assign guard_lo = s1_v ? s1_lo : cur_lo_q;
  assign in_ready = wr_rel_q < guard_lo + MDR_S;
  assign wr       = in_valid && in_ready;

  delay_profile_mem #(.F(F), .F_SUB(F_SUB), .D(D)) u_dly (
    .clk, .rst_n, .ld_restart, .ld_valid, .ld_data, .ld_done,
    .rd_en   (issue),
    .rd_addr (DAW'(z_q) * DAW'(K) + DAW'(k_q)),
    .rd_data (dly),
    .bnd_z   (z_q),
    .bnd_lo  (bnd_lo),
    .bnd_hi  (bnd_hi)
  );

  for (genvar s = 0; s < F_SUB; s++) begin : g_buf
    rf_buffer #(.W_I(W_I), .MDR(MDR)) u_buf (
      .clk,
      .wr_en  (wr),
      .wr_idx (IDX_W'(wr_ptr_q)),
      .wr_row (in_row),
      .rd_en  (adv && s1_v),
      .rd_idx (IDX_W'(s1_base) + dly[s].idx),
      .rd_row (rf_rows[s])
    );
  end

  diag_sum #(.W_I(W_I), .F_SUB(F_SUB)) u_diag (
    .rows (rf_rows),
    .en   (s2_en),
    .p    (p)
  );

  row_accum #(.W_I(W_I), .F(F), .F_SUB(F_SUB)) u_acc (
    .clk, .rst_n,
    .en       (adv),
    .in_valid (s3_v),
    .in_k     (s3_k),
    .in_last  (s3_last),
    .p        (s3_p),
    .out_valid,
    .out_ready,
    .out_row
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_q <= '0; k_q <= '0; wr_rel_q <= '0; wr_ptr_q <= '0; base_q <= '0; cur_lo_q <= '0;
      s1_v <= 1'b0; s1_last <= 1'b0; s1_k <= '0; s1_lo <= '0; s1_base <= '0;
      s2_v <= 1'b0; s2_last <= 1'b0; s2_k <= '0; s2_en <= '0;
      s3_v <= 1'b0; s3_last <= 1'b0; s3_k <= '0; s3_p <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= frame_sw;
      if (wr) wr_ptr_q <= (wr_ptr_q == BW'(MDR - 1)) ? '0 : wr_ptr_q + 1'b1;
      // from the frame switch on, row indexes count from the next frame
      wr_rel_q <= wr_rel_q + (wr ? RW'(1) : RW'(0)) - (frame_sw ? D_S : RW'(0));
      if (adv) begin
        s1_v    <= issue;
        s1_k    <= k_q;
        s1_last <= (k_q == KW'(K - 1));
        s1_lo   <= ((k_q == '0) ? RW'(bnd_lo) : cur_lo_q) - (frame_sw ? D_S : RW'(0));
        s1_base <= base_q;
        s2_v    <= s1_v;
        s2_k    <= s1_k;
        s2_last <= s1_last;
        for (int s = 0; s < F_SUB; s++) s2_en[s] <= dly[s].en;
        s3_v    <= s2_v;
        s3_k    <= s2_k;
        s3_last <= s2_last;
        s3_p    <= p;
        if (issue) begin
          if (k_q == '0) cur_lo_q <= RW'(bnd_lo);
          if (k_q == KW'(K - 1)) begin
            k_q <= '0;
            z_q <= (z_q == ZW'(D - 1)) ? '0 : z_q + 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
          if (frame_sw) begin
            cur_lo_q <= '0;
            base_q   <= (32'(base_q) + D % MDR >= MDR) ? BW'(32'(base_q) + D % MDR - MDR)
                                                       : BW'(32'(base_q) + D % MDR);
          end
        end
      end
    end
  end

  // a depth may only be issued when its whole dependent range fits the buffer
  a_dr : assert property (@(posedge clk) disable iff (!rst_n)
                          (issue && k_q == '0) |-> (bnd_hi - bnd_lo < IDX_W'(MDR)));
endmodule
