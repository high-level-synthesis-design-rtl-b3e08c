// tb_bf_top: end-to-end test of the beamformer at reduced size with two cores
// (R = 2). Both delay profiles are loaded through dp_sel, three frames of raw
// rows are streamed (the first two back to back at full rate, the third with
// random gaps and output back-pressure) and every beamformed pixel is
// compared with the reference model. It also counts how often each mechanism
// occurred and fails if one never did: output back-pressure, forwarding of a
// channel with N_remove = MTD, masked profile entries, wrap of the cyclic RF
// buffer, the writer held back by the buffer guard, a depth waiting for its
// rows, the interpolator's end-of-frame row, frame completion, rows of the
// next frame written while the current one is still being formed, and the
// transmit stage finishing a frame on its own (flush) once input stops.
// Frames 0 and 1 together must take at least (2D-1)*K cycles between the
// first and the last output row and at most MDR*K more, i.e. no gap opens
// between the two frames.
module tb_bf_top;
  import bf_pkg::*;
  import bf_model_pkg::*;
  localparam int W = 16, F = 8, FS = 2, K = F/FS, R = 2, DR = 20, D = 2*DR;
  localparam int MDR = 12, MTDM = 8, FRAMES = 3, MTD = 5;
  localparam int OW = SAMPLE_W + $clog2(F) + 1, PW = $clog2(MTDM+1);
  logic clk = 0, rst_n = 0;
  logic [PW-1:0] cfg_mtd;
  logic [PW-1:0] cfg_n_remove [W];
  logic dp_restart = 0, dp_valid = 0, dp_done;
  logic [0:0] dp_sel = '0;
  delay_t [FS-1:0] dp_data = '0;
  logic raw_valid = 0, raw_ready, bf_valid, bf_ready = 1, frame_done;
  sample_t [W-1:0] raw_row = '0;
  logic signed [W*R-1:0][OW-1:0] bf_row;
  int checks = 0, failures = 0;

  int nrem[], idx[R][], raw[FRAMES][], comp[], expv[FRAMES][R][];
  bit en[R][];
  bit random_phase = 0;

  bf_top #(.W_I(W), .F(F), .F_SUB(FS), .R(R), .D_RAW(DR), .MDR(MDR), .MTD_MAX(MTDM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nrem = new[W];
    for (int c = 0; c < W; c++) nrem[c] = (c * 3) / 8;   // 0 .. MTD
    cfg_mtd = PW'(MTD);
    for (int c = 0; c < W; c++) cfg_n_remove[c] = PW'(nrem[c]);
    for (int r = 0; r < R; r++) begin
      idx[r] = new[D*F]; en[r] = new[D*F];
      for (int z = 0; z < D; z++)
        for (int j = 0; j < F; j++) begin
          int dx, v;
          dx = j - F/2;
          v  = z + (dx*dx + r*(dx > 0 ? dx : 0)) / (2 + z/2);
          idx[r][z*F + j] = v;
          en[r][z*F + j]  = (dx*dx <= z*z) && (v < D);
        end
    end
    for (int f = 0; f < FRAMES; f++) begin
      raw[f] = new[DR*W];
      foreach (raw[f][i]) raw[f][i] = int'($signed(16'($urandom)));
      compensate(W, DR, nrem, raw[f], comp);
      for (int r = 0; r < R; r++) das(W, F, D, comp, idx[r], en[r], expv[f][r]);
    end
  end

  int sent = 0, t = 0, t_first_in = 0, t_first_out = 0;
  always @(posedge clk) t++;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); dp_restart = 1; @(negedge clk); dp_restart = 0;
    for (int r = 0; r < R; r++)
      for (int w = 0; w < D*K; w++) begin
        @(negedge clk); dp_valid = 1; dp_sel = 1'(r);
        for (int s = 0; s < FS; s++) begin
          dp_data[s].idx = IDX_W'(idx[r][(w / K)*F + (w % K)*FS + s]);
          dp_data[s].en  = en[r][(w / K)*F + (w % K)*FS + s];
        end
      end
    @(negedge clk); dp_valid = 0;
    @(negedge clk); checks++; if (!dp_done) failures++;
    while (sent < FRAMES*DR) begin
      @(negedge clk);
      raw_valid = (sent >= 2*DR && random_phase) ? ($urandom_range(3) != 0) : 1'b1;
      for (int c = 0; c < W; c++) raw_row[c] = sample_t'(raw[sent / DR][(sent % DR)*W + c]);
      @(posedge clk);
      if (raw_valid && raw_ready) begin
        if (sent == 0) t_first_in = t;
        sent++;
      end
    end
    @(negedge clk); raw_valid = 0;
  end

  always @(negedge clk) bf_ready = random_phase ? ($urandom_range(3) == 0) : 1'b1;

  // mechanism counters
  int n_bp = 0, n_byp = 0, n_mask = 0, n_wrap = 0, n_guard = 0, n_wait = 0, n_tail = 0, n_frames = 0;
  int n_ovl = 0, n_flush = 0;
  always @(posedge clk) if (rst_n) begin
    if (bf_valid && !bf_ready) n_bp++;
    if (dut.u_tx.rv_q && dut.u_tx.byp_q != '0) n_byp++;
    if (dut.g_core[0].u_core.s2_v && dut.g_core[0].u_core.s2_en != '1) n_mask++;
    if (dut.t_valid && dut.t_ready && dut.g_core[0].u_core.wr_ptr_q == MDR - 1) n_wrap++;
    if (dut.t_valid && dut.t_ready && dut.g_core[0].u_core.wr_rel_q >= D) n_ovl++;
    if (dut.u_tx.start_fl && !dut.u_tx.fl_q) n_flush++;
    if (dut.t_valid && !dut.t_ready) n_guard++;
    if (dut.g_core[0].u_core.k_q == 0 && !dut.g_core[0].u_core.rows_ok) n_wait++;
    if (dut.i_valid && dut.i_ready && dut.u_interp.pend == 3) n_tail++;
    if (frame_done) n_frames++;
  end

  int got = 0;
  always @(posedge clk) if (rst_n && bf_valid && bf_ready) begin
    int f, z;
    f = got / D; z = got % D;
    for (int x = 0; x < W; x++)
      for (int r = 0; r < R; r++) begin
        checks++;
        if (int'($signed(bf_row[x*R + r])) != expv[f][r][z*W + x]) begin
          failures++;
          if (failures < 6) $display("f%0d z%0d x%0d r%0d got %0d exp %0d", f, z, x, r,
                                     $signed(bf_row[x*R + r]), expv[f][r][z*W + x]);
        end
      end
    if (got == 0) t_first_out = t;
    if (got == 2*D - 1) begin
      checks++;
      if (t - t_first_out < (2*D-1)*K || t - t_first_out > (2*D-1+MDR)*K) begin
        failures++;
        $display("frames 0-1 timing: first-to-last out %0d", t - t_first_out);
      end
      $display("frames 0-1: %0d cycles first to last row, %0d from first raw row (2*D*K = %0d)",
               t - t_first_out, t - t_first_in, 2*D*K);
      random_phase = 1;
    end
    got++;
    if (got == FRAMES*D) begin
      repeat (10) @(posedge clk);
      $display("backpressure=%0d bypass=%0d masked=%0d wrap=%0d guard=%0d wait=%0d tail=%0d frames=%0d overlap=%0d flush=%0d",
               n_bp, n_byp, n_mask, n_wrap, n_guard, n_wait, n_tail, n_frames, n_ovl, n_flush);
      foreach (ev[i]) begin
        checks++;
        if (ev[i] == 0) begin failures++; $display("mechanism %0d never occurred", i); end
      end
      checks++; if (n_frames != FRAMES) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
  int ev[10];
  always_comb ev = '{n_bp, n_byp, n_mask, n_wrap, n_guard, n_wait, n_tail, n_frames, n_ovl, n_flush};
endmodule
