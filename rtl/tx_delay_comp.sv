// tx_delay_comp: transmit delay compensation for a steered plane wave.
//
// For receive channel n the first N_remove[n] interpolated samples of every
// frame are dropped, which removes the x_n*sin(theta)/c part of the transmit
// delay so that one delay profile serves every lateral pixel position. Each
// channel is a FIFO: with N the row (sample) index since the stream started,
// channel n writes when N >= N_remove[n] and all channels read together when
// N >= MTD, where MTD is the largest N_remove over the channels and steering
// angles (the 1-based "N larger than" rules become >= with N counted from 0).
// Each channel is thus a fixed delay line of MTD - N_remove[n] rows. Output
// row m of a frame holds, for channel n, input row m + N_remove[n] of the same
// frame; where that lies past the frame end the sample is zeroed.
//
// Storage follows the banked layout: NBANK = W_I*F_SUB/F simple dual-port
// RAMs, each MTD_MAX*K deep with K = F/F_SUB. Channel c lives in bank
// c % NBANK, region c / NBANK, so one row is processed in K cycles and in
// cycle k the banks handle channels k*NBANK .. k*NBANK+NBANK-1 (one write and
// one read each). Each channel keeps its own write pointer; the read pointer
// is shared because every channel starts reading at the same N. A channel
// whose N_remove equals MTD has an empty FIFO and its input is forwarded.
//
// Frame sequencing (this design's choice): frames of one steering angle
// stream back to back, one row per K-cycle step, so the first MTD rows of a
// frame share steps with the last MTD output rows of the frame before. If no
// input row is offered when a frame has been fully taken in, the stage
// finishes that frame with MTD zero-row steps and restarts the stream; this
// is also when cfg_mtd and cfg_n_remove may change (both must otherwise be
// stable). Requires cfg_mtd <= MTD_MAX, every cfg_n_remove[c] <= cfg_mtd and
// D >= MTD_MAX.
//
// Interface: valid/ready row streams in and out; in_ready does not depend on
// in_valid. Latency from a step's first cycle to its output row is K+1
// cycles, plus MTD steps at the start of a stream.
module tx_delay_comp
  import bf_pkg::*;
#(
  parameter int unsigned W_I     = 128,
  parameter int unsigned F       = 64,
  parameter int unsigned F_SUB   = 8,
  parameter int unsigned D       = 2560,  // interpolated rows per frame
  parameter int unsigned MTD_MAX = 256    // largest supported MTD
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [$clog2(MTD_MAX+1)-1:0] cfg_mtd,
  input  logic [$clog2(MTD_MAX+1)-1:0] cfg_n_remove [W_I],
  input  logic                         in_valid,
  output logic                         in_ready,
  input  sample_t [W_I-1:0]            in_row,
  output logic                         out_valid,
  input  logic                         out_ready,
  output sample_t [W_I-1:0]            out_row
);
  localparam int unsigned K     = F / F_SUB;
  localparam int unsigned NBANK = W_I / K;
  localparam int unsigned PW    = $clog2(MTD_MAX + 1);
  localparam int unsigned AW    = $clog2(MTD_MAX * K);
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned DW    = $clog2(D + MTD_MAX + 1);

  // ---- step control ----
  logic [PW-1:0]  ns_q;      // steps since stream start, saturating at MTD
  logic [DW-1:0]  ri_q;      // input rows taken in the current frame
  logic [DW-1:0]  ro_q;      // output row index within its frame
  logic           fl_q;      // finishing a frame with zero rows
  logic [PW-1:0]  fc_q;      // zero-row steps done
  logic [KW-1:0]  k_q;       // cycle within the step
  logic           busy_q;    // inside a step (k_q > 0)
  logic           stepfl_q;  // the current step is a zero-row step
  logic [PW-1:0]  wp_q [W_I];
  logic [PW-1:0]  rp_q;
  sample_t [W_I-1:0] row_q;

  // read pipeline, one cycle behind the RAM address
  logic           rv_q, rlast_q;
  logic [KW-1:0]  rk_q;
  logic [NBANK-1:0] byp_q, zero_q;
  sample_t [NBANK-1:0] bypd_q;
  sample_t [W_I-1:0]   col_q;

  logic out_free, adv, start_in, start_fl, start, step_act, step_fl;
  logic step_reads, step_end, fl_last;
  sample_t [W_I-1:0] cur_row;

  assign out_free   = !out_valid || out_ready;
  assign adv        = !(rv_q && rlast_q && !out_free);
  assign in_ready   = adv && !busy_q && !fl_q;
  assign start_in   = in_ready && in_valid;
  assign start_fl   = adv && !busy_q && !start_in &&
                      (fl_q || (ri_q == '0 && ns_q != '0));
  assign start      = start_in || start_fl;
  assign step_act   = start || (adv && busy_q);
  assign step_fl    = busy_q ? stepfl_q : start_fl;
  assign step_reads = (ns_q == cfg_mtd);
  assign step_end   = step_act && (k_q == KW'(K - 1));
  assign fl_last    = step_fl && (fc_q + 1'b1 >= cfg_mtd);
  assign cur_row    = busy_q ? row_q : (start_in ? in_row : '0);

  // ---- banks ----
  logic [NBANK-1:0] we;
  logic [AW-1:0]    waddr [NBANK];
  logic [AW-1:0]    raddr;
  sample_t          rdata [NBANK];

  always_comb begin
    raddr = AW'(k_q) * AW'(MTD_MAX) + AW'(rp_q);
    for (int b = 0; b < NBANK; b++) begin
      we[b]    = step_act && (ns_q >= cfg_n_remove[int'(k_q) * NBANK + b]);
      waddr[b] = AW'(k_q) * AW'(MTD_MAX) + AW'(wp_q[int'(k_q) * NBANK + b]);
    end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sdp_ram #(.WIDTH(SAMPLE_W), .DEPTH(MTD_MAX * K)) u_ram (
      .clk   (clk),
      .we    (we[b]),
      .waddr (waddr[b]),
      .wdata (cur_row[int'(k_q) * NBANK + b]),
      .re    (step_act && step_reads),
      .raddr (raddr),
      .rdata (rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ns_q <= '0; ri_q <= '0; ro_q <= '0; fl_q <= 1'b0; fc_q <= '0;
      k_q <= '0; busy_q <= 1'b0; stepfl_q <= 1'b0; rp_q <= '0;
      for (int c = 0; c < W_I; c++) wp_q[c] <= '0;
      row_q <= '0;
      rv_q <= 1'b0; rlast_q <= 1'b0; rk_q <= '0; byp_q <= '0; zero_q <= '0; bypd_q <= '0;
      col_q <= '0;
      out_valid <= 1'b0; out_row <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        // collect the bank outputs of the previous cycle
        if (rv_q) begin
          for (int b = 0; b < NBANK; b++)
            col_q[int'(rk_q) * NBANK + b] <= zero_q[b] ? '0 : (byp_q[b] ? bypd_q[b] : rdata[b]);
          if (rlast_q) begin
            for (int c = 0; c < W_I; c++) out_row[c] <= col_q[c];
            for (int b = 0; b < NBANK; b++)
              out_row[int'(rk_q) * NBANK + b] <= zero_q[b] ? '0 : (byp_q[b] ? bypd_q[b] : rdata[b]);
            out_valid <= 1'b1;
          end
        end
        rv_q    <= step_act && step_reads;
        rlast_q <= step_end && step_reads;
        rk_q    <= k_q;
        for (int b = 0; b < NBANK; b++) begin
          byp_q[b]  <= (cfg_n_remove[int'(k_q) * NBANK + b] == cfg_mtd);
          zero_q[b] <= (DW'(ro_q) + DW'(cfg_n_remove[int'(k_q) * NBANK + b]) >= DW'(D));
          bypd_q[b] <= cur_row[int'(k_q) * NBANK + b];
        end
        if (start) begin
          row_q    <= cur_row;
          stepfl_q <= start_fl;
          if (start_fl) fl_q <= 1'b1;
        end
        if (step_act) begin
          for (int b = 0; b < NBANK; b++)
            if (we[b])
              wp_q[int'(k_q) * NBANK + b] <= (wp_q[int'(k_q) * NBANK + b] + 1'b1 == PW'(cfg_mtd))
                                             ? '0 : wp_q[int'(k_q) * NBANK + b] + 1'b1;
          if (step_end) begin
            busy_q <= 1'b0;
            k_q    <= '0;
            if (ns_q != cfg_mtd) ns_q <= ns_q + 1'b1;
            if (step_reads) begin
              rp_q <= (rp_q + 1'b1 == PW'(cfg_mtd)) ? '0 : rp_q + 1'b1;
              ro_q <= (ro_q == DW'(D - 1)) ? '0 : ro_q + 1'b1;
            end
            if (!step_fl) ri_q <= (ri_q == DW'(D - 1)) ? '0 : ri_q + 1'b1;
            if (step_fl) fc_q <= fc_q + 1'b1;
            if (fl_last) begin
              // frame finished: restart the stream
              ns_q <= '0; ro_q <= '0; rp_q <= '0; fc_q <= '0; fl_q <= 1'b0;
              for (int c = 0; c < W_I; c++) wp_q[c] <= '0;
            end
          end else begin
            busy_q <= 1'b1;
            k_q    <= k_q + 1'b1;
          end
        end
      end
    end
  end

  // the FIFO of a channel can never hold more than MTD samples
  for (genvar c = 0; c < W_I; c++) begin : g_chk
    a_nrem : assert property (@(posedge clk) disable iff (!rst_n)
                              cfg_n_remove[c] <= cfg_mtd);
  end
endmodule
