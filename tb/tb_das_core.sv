// tb_das_core: loads a small delay profile (depth-dependent aperture, curved
// delays, entries past the frame masked), streams three frames of RF rows and
// compares every beamformed pixel with a delay-and-sum computed here:
//   out[z][x] = sum over enabled j of row[idx(z,j)][x + j - F/2].
// The first two frames run at full rate and must leave one depth every K
// cycles, including across the frame boundary (no gap between frames); the
// third uses random input gaps and output back-pressure. MDR is smaller than
// a frame and does not divide it, so the cyclic buffer wraps at a different
// place in every frame and the writer is throttled.
module tb_das_core;
  import bf_pkg::*;
  localparam int W = 8, F = 8, FS = 2, K = F/FS, D = 24, MDR = 7, FRAMES = 3;
  localparam int OW = SAMPLE_W + $clog2(F) + 1;
  logic clk = 0, rst_n = 0;
  logic ld_restart = 0, ld_valid = 0, ld_done;
  delay_t [FS-1:0] ld_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, frame_done;
  sample_t [W-1:0] in_row = '0;
  logic signed [W-1:0][OW-1:0] out_row;
  int checks = 0, failures = 0;
  delay_t prof [D][F];
  int rf [FRAMES][D][W];
  int expv [FRAMES][D][W];
  bit random_phase = 0;
  int throttled = 0;

  das_core #(.W_I(W), .F(F), .F_SUB(FS), .D(D), .MDR(MDR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int z = 0; z < D; z++)
      for (int j = 0; j < F; j++) begin
        int dx, idx;
        dx  = j - F/2;
        idx = z + (dx*dx) / (2 + z/2);
        prof[z][j].idx = IDX_W'(idx);
        prof[z][j].en  = (dx*dx <= z*z) && (idx < D);
      end
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < D; r++)
        for (int c = 0; c < W; c++) rf[f][r][c] = int'($signed(16'($urandom)));
    for (int f = 0; f < FRAMES; f++)
      for (int z = 0; z < D; z++)
        for (int x = 0; x < W; x++) begin
          int acc;
          acc = 0;
          for (int j = 0; j < F; j++) begin
            int ch;
            ch = x + j - F/2;
            if (prof[z][j].en && ch >= 0 && ch < W) acc += rf[f][prof[z][j].idx][ch];
          end
          expv[f][z][x] = acc;
        end
  end

  int sent = 0;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); ld_restart = 1; @(negedge clk); ld_restart = 0;
    for (int w = 0; w < D*K; w++) begin
      @(negedge clk); ld_valid = 1;
      for (int s = 0; s < FS; s++) ld_data[s] = prof[w / K][(w % K) * FS + s];
    end
    @(negedge clk); ld_valid = 0;
    @(negedge clk);
    checks++; if (!ld_done) failures++;
    while (sent < FRAMES*D) begin
      @(negedge clk);
      in_valid = (sent >= 2*D) ? ($urandom_range(3) != 0) : 1'b1;
      for (int c = 0; c < W; c++) in_row[c] = sample_t'(rf[sent / D][sent % D][c]);
      @(posedge clk);
      if (in_valid && !in_ready && sent % D < D - 1) throttled++;
      if (in_valid && in_ready) sent++;
    end
    @(negedge clk); in_valid = 0;
  end

  always @(negedge clk) out_ready = random_phase ? ($urandom_range(2) != 0) : 1'b1;

  int got = 0, t = 0, first_t = 0, frames_seen = 0;
  always @(posedge clk) t++;
  always @(posedge clk) if (rst_n && frame_done) frames_seen++;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int f, z;
    f = got / D; z = got % D;
    for (int x = 0; x < W; x++) begin
      checks++;
      if (int'($signed(out_row[x])) != expv[f][z][x]) begin
        failures++;
        if (failures < 6) $display("f%0d z%0d x%0d got %0d exp %0d", f, z, x, $signed(out_row[x]), expv[f][z][x]);
      end
    end
    if (got == 0) first_t = t;
    if (got == 2*D - 1) begin
      checks++;
      if (t - first_t != (2*D - 1) * K) begin
        failures++;
        $display("frames 0-1: %0d cycles from first to last row, expected %0d", t - first_t, (2*D-1)*K);
      end
      random_phase = 1;
    end
    got++;
    if (got == FRAMES*D) begin
      repeat (5) @(posedge clk);
      checks++; if (frames_seen != FRAMES) begin failures++; $display("frame_done count %0d", frames_seen); end
      checks++; if (throttled == 0) begin failures++; $display("writer was never throttled"); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
