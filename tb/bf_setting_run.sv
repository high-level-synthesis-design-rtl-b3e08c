// bf_setting_run: testbench helper that takes one build of bf_top (its
// parameters are this module's) through two back-to-back frames of a
// full-length acquisition and checks every beamformed pixel against the
// reference model. The acquisition is a plane wave steered by THETA_DEG on an
// array of W channels whose pitch is PITCH samples of the interpolated rate,
// F-number 1 (entries outside |dx*pitch| <= z/4 disabled):
//   N_remove[n] = round(n * pitch * sin(theta))
//   idx_r(z, j) = round(z/2*cos(theta) - dx*pitch*sin(theta)
//                       + sqrt((z/2)^2 + (dx*pitch)^2)),  dx = j - F/2 - r/R
// Core r gets the profile of lateral offset r/R of a pitch, so output column
// x*R + r is the pixel at x + r/R. The second frame must end exactly D*K
// cycles after the first, which is the build's frame period.
//
// Ports: clk in; done, checks and failures out (done stays high at the end).
module bf_setting_run
  import bf_pkg::*;
  import bf_model_pkg::*;
#(
  parameter int W   = 128,
  parameter int F   = 64,
  parameter int FS  = 8,
  parameter int R   = 1,
  parameter int DR  = 1280,
  parameter int MDR = 150,
  parameter int MTD_MAX = 256,
  parameter real PITCH = 11.2,
  parameter real THETA_DEG = 4.0,
  parameter string NAME = "setting"
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int K = F / FS, D = 2 * DR;
  localparam int OW = SAMPLE_W + $clog2(F) + 1, PW = $clog2(MTD_MAX + 1);
  localparam int SW = (R > 1) ? $clog2(R) : 1;
  localparam real THETA = THETA_DEG * 3.14159265358979 / 180.0;
  logic rst_n = 0;
  logic [PW-1:0] cfg_mtd;
  logic [PW-1:0] cfg_n_remove [W];
  logic dp_restart = 0, dp_valid = 0, dp_done;
  logic [SW-1:0] dp_sel = '0;
  delay_t [FS-1:0] dp_data = '0;
  logic raw_valid = 0, raw_ready, bf_valid, bf_ready = 1, frame_done;
  sample_t [W-1:0] raw_row = '0;
  logic signed [W*R-1:0][OW-1:0] bf_row;
  int nrem[], idx[R][], raw[], expv[2][R][];
  bit en[R][];
  int mtd, max_dr;

  bf_top #(.W_I(W), .F(F), .F_SUB(FS), .R(R), .D_RAW(DR), .MDR(MDR), .MTD_MAX(MTD_MAX)) dut (
    .clk, .rst_n, .cfg_mtd, .cfg_n_remove, .dp_restart, .dp_valid, .dp_sel, .dp_data,
    .dp_done, .raw_valid, .raw_ready, .raw_row, .bf_valid, .bf_ready, .bf_row, .frame_done
  );

  initial begin
    done = 0; checks = 0; failures = 0;
    nrem = new[W];
    mtd = 0;
    for (int c = 0; c < W; c++) begin
      nrem[c] = int'($rtoi(c * PITCH * $sin(THETA) + 0.5));
      if (nrem[c] > mtd) mtd = nrem[c];
    end
    cfg_mtd = PW'(mtd);
    for (int c = 0; c < W; c++) cfg_n_remove[c] = PW'(nrem[c]);
    max_dr = 0;
    for (int r = 0; r < R; r++) begin
      idx[r] = new[D*F]; en[r] = new[D*F];
      for (int z = 0; z < D; z++) begin
        int lo, hi;
        lo = D; hi = 0;
        for (int j = 0; j < F; j++) begin
          real zd, ax, v;
          zd = z / 2.0;
          ax = (j - F/2 - real'(r) / R) * PITCH;
          v  = zd * $cos(THETA) - ax * $sin(THETA) + $sqrt(zd*zd + ax*ax);
          idx[r][z*F + j] = $rtoi(v + 0.5);
          en[r][z*F + j]  = (ax*ax <= zd*zd/4.0) && (idx[r][z*F + j] < D) && (v >= 0.0);
          if (!en[r][z*F + j]) idx[r][z*F + j] = 0;
          if (en[r][z*F + j] && idx[r][z*F + j] < lo) lo = idx[r][z*F + j];
          if (en[r][z*F + j] && idx[r][z*F + j] > hi) hi = idx[r][z*F + j];
        end
        if (hi >= lo && hi - lo + 1 > max_dr) max_dr = hi - lo + 1;
      end
    end
    $display("%s: MTD = %0d, largest dependent range = %0d (MDR %0d)", NAME, mtd, max_dr, MDR);
    checks++; if (max_dr > MDR || mtd > MTD_MAX) failures++;
    raw = new[2*DR*W];
    foreach (raw[i]) raw[i] = int'($signed(16'($urandom)));
    for (int f = 0; f < 2; f++) begin
      int rawf[], comp[];
      rawf = new[DR*W];
      foreach (rawf[i]) rawf[i] = raw[f*DR*W + i];
      compensate(W, DR, nrem, rawf, comp);
      for (int r = 0; r < R; r++) das(W, F, D, comp, idx[r], en[r], expv[f][r]);
    end
  end

  int sent = 0, t = 0;
  always @(posedge clk) t++;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); dp_restart = 1; @(negedge clk); dp_restart = 0;
    for (int r = 0; r < R; r++)
      for (int w = 0; w < D*K; w++) begin
        @(negedge clk); dp_valid = 1; dp_sel = SW'(r);
        for (int s = 0; s < FS; s++) begin
          dp_data[s].idx = IDX_W'(idx[r][(w / K)*F + (w % K)*FS + s]);
          dp_data[s].en  = en[r][(w / K)*F + (w % K)*FS + s];
        end
      end
    @(negedge clk); dp_valid = 0;
    @(negedge clk); checks++; if (!dp_done) failures++;
    while (sent < 2*DR) begin
      @(negedge clk);
      raw_valid = 1'b1;
      for (int c = 0; c < W; c++) raw_row[c] = sample_t'(raw[sent*W + c]);
      @(posedge clk);
      if (raw_valid && raw_ready) sent++;
    end
    @(negedge clk); raw_valid = 0;
  end

  int got = 0, t_end0 = 0;
  always @(posedge clk) if (rst_n && bf_valid && bf_ready && !done) begin
    int f, z;
    f = got / D; z = got % D;
    for (int x = 0; x < W; x++)
      for (int r = 0; r < R; r++) begin
        checks++;
        if (int'($signed(bf_row[x*R + r])) != expv[f][r][z*W + x]) begin
          failures++;
          if (failures < 6) $display("%s: f%0d z%0d x%0d r%0d got %0d exp %0d", NAME, f, z, x, r,
                                     $signed(bf_row[x*R + r]), expv[f][r][z*W + x]);
        end
      end
    got++;
    if (got == D) t_end0 = t;
    if (got == 2*D) begin
      $display("%s: %0d output lines, frame period %0d cycles (%0d depths x %0d)",
               NAME, W*R, t - t_end0, D, K);
      checks++;
      if (t - t_end0 != D*K) failures++;
      done = 1;
    end
  end
endmodule
