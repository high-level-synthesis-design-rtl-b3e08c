// tb_bf_full: two complete frames, back to back, through the beamformer at its default size
// (128 channels, subaperture 64, 8 RF buffers, one core, 1,280 raw rows ->
// 2,560 depths, MDR 150). The delay profile and the per-channel sample
// removal are computed here for a 4-degree plane wave on a 128-element array
// sampled at 250 MHz after interpolation, with an element pitch of 11.2
// samples (about 0.069 mm at 1540 m/s) and an F-number of 1:
//   N_remove[n] = round(n * pitch * sin(theta))
//   idx(z, dx)  = round(z/2*cos(theta) - dx*pitch*sin(theta)
//                       + sqrt((z/2)^2 + (dx*pitch)^2)),  dx = j - 32
// with entries outside |dx*pitch| <= z/4 or past the frame disabled. Every
// pixel of both frames is compared with the reference model. For the first
// frame the time from the first to the last beamformed row is checked to be
// at least 2,559 x 8 cycles and at most (2,560 + largest dependent range) x 8
// plus 64 cycles; the second frame must end exactly 2,560 x 8 cycles after
// the first, i.e. frames follow each other with no gap.
module tb_bf_full;
  import bf_pkg::*;
  import bf_model_pkg::*;
  localparam int W = 128, F = 64, FS = 8, K = F/FS, DR = 1280, D = 2*DR, MDR = 150;
  localparam int OW = SAMPLE_W + $clog2(F) + 1, PW = $clog2(256+1);
  localparam real PITCH = 11.2, THETA = 4.0 * 3.14159265358979 / 180.0;
  logic clk = 0, rst_n = 0;
  logic [PW-1:0] cfg_mtd;
  logic [PW-1:0] cfg_n_remove [W];
  logic dp_restart = 0, dp_valid = 0, dp_done;
  logic [0:0] dp_sel = '0;
  delay_t [FS-1:0] dp_data = '0;
  logic raw_valid = 0, raw_ready, bf_valid, bf_ready = 1, frame_done;
  sample_t [W-1:0] raw_row = '0;
  logic signed [W-1:0][OW-1:0] bf_row;
  int checks = 0, failures = 0;
  int nrem[], idx[], raw[], comp[], expv[];
  bit en[];
  int mtd, max_dr;

  bf_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nrem = new[W];
    mtd = 0;
    for (int c = 0; c < W; c++) begin
      nrem[c] = int'($rtoi(c * PITCH * $sin(THETA) + 0.5));
      if (nrem[c] > mtd) mtd = nrem[c];
    end
    cfg_mtd = PW'(mtd);
    for (int c = 0; c < W; c++) cfg_n_remove[c] = PW'(nrem[c]);
    idx = new[D*F]; en = new[D*F];
    max_dr = 0;
    for (int z = 0; z < D; z++) begin
      int lo, hi;
      lo = D; hi = 0;
      for (int j = 0; j < F; j++) begin
        real zd, ax, v;
        zd = z / 2.0;
        ax = (j - F/2) * PITCH;
        v  = zd * $cos(THETA) - ax * $sin(THETA) + $sqrt(zd*zd + ax*ax);
        idx[z*F + j] = $rtoi(v + 0.5);
        en[z*F + j]  = (ax*ax <= zd*zd/4.0) && (idx[z*F + j] < D) && (v >= 0.0);
        if (!en[z*F + j]) idx[z*F + j] = 0;
        if (en[z*F + j] && idx[z*F + j] < lo) lo = idx[z*F + j];
        if (en[z*F + j] && idx[z*F + j] > hi) hi = idx[z*F + j];
      end
      if (hi >= lo && hi - lo + 1 > max_dr) max_dr = hi - lo + 1;
    end
    $display("MTD = %0d samples, largest dependent range = %0d rows (MDR %0d)", mtd, max_dr, MDR);
    checks++; if (max_dr > MDR) failures++;
    raw = new[2*DR*W];
    foreach (raw[i]) raw[i] = int'($signed(16'($urandom)));
    expv = new[2*D*W];
    for (int f = 0; f < 2; f++) begin
      int rawf[], outf[];
      rawf = new[DR*W];
      foreach (rawf[i]) rawf[i] = raw[f*DR*W + i];
      compensate(W, DR, nrem, rawf, comp);
      das(W, F, D, comp, idx, en, outf);
      foreach (outf[i]) expv[f*D*W + i] = outf[i];
    end
  end

  int sent = 0, t = 0, t_first_in = 0, t_first_out = 0;
  always @(posedge clk) t++;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); dp_restart = 1; @(negedge clk); dp_restart = 0;
    for (int w = 0; w < D*K; w++) begin
      @(negedge clk); dp_valid = 1;
      for (int s = 0; s < FS; s++) begin
        dp_data[s].idx = IDX_W'(idx[(w / K)*F + (w % K)*FS + s]);
        dp_data[s].en  = en[(w / K)*F + (w % K)*FS + s];
      end
    end
    @(negedge clk); dp_valid = 0;
    @(negedge clk); checks++; if (!dp_done) failures++;
    while (sent < 2*DR) begin
      @(negedge clk);
      raw_valid = 1'b1;
      for (int c = 0; c < W; c++) raw_row[c] = sample_t'(raw[sent*W + c]);
      @(posedge clk);
      if (raw_valid && raw_ready) begin
        if (sent == 0) t_first_in = t;
        sent++;
      end
    end
    @(negedge clk); raw_valid = 0;
  end

  int got = 0, t_end0 = 0;
  always @(posedge clk) if (rst_n && bf_valid && bf_ready) begin
    for (int x = 0; x < W; x++) begin
      checks++;
      if (int'($signed(bf_row[x])) != expv[got*W + x]) begin
        failures++;
        if (failures < 6) $display("z%0d x%0d got %0d exp %0d", got, x, $signed(bf_row[x]), expv[got*W + x]);
      end
    end
    if (got == 0) t_first_out = t;
    got++;
    if (got == D) begin
      $display("frame 0: %0d cycles first to last row, %0d from first raw row (D*K = %0d)",
               t - t_first_out, t - t_first_in, D*K);
      checks++;
      // a depth cannot leave faster than every K cycles; since rows enter at
      // one per K cycles, depths also wait for their lead over the input,
      // which is bounded by the largest dependent range
      if (t - t_first_out < (D-1)*K || t - t_first_out > (D + max_dr)*K + 64) failures++;
      t_end0 = t;
    end
    if (got == 2*D) begin
      $display("frame 1 ended %0d cycles after frame 0", t - t_end0);
      checks++;
      if (t - t_end0 != D*K) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
