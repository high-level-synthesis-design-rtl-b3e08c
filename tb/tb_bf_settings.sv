// tb_bf_settings: runs the other published build settings of the beamformer
// on full-length frames (1,280 raw samples, 2,560 depths), each as its own
// bf_top instance driven by bf_setting_run:
//   setting 1:  64 channels, subaperture 32, 4 RF buffers, 1 core (8 cycles/depth)
//   setting 3: 128 channels, subaperture 64, 16 RF buffers, 1 core (4 cycles/depth)
//   setting 4: 128 channels, subaperture 64, 8 RF buffers, 2 cores (256 lines)
// The three use a 4-degree plane wave with a pitch of 11.2 samples. A fourth
// instance runs the phantom acquisition's steepest angle, 18 degrees with a
// 0.3 mm pitch sampled at 62.5 MHz after interpolation (12.2 samples), which
// needs MTD_MAX = 512 and a deeper RF buffer (MDR = 320) than the default
// build; its frame length of 1,280 raw samples is assumed.
// Every pixel of two back-to-back frames is compared with the reference
// model, and each build's frame period must be D*K cycles: 20,480 for
// settings 1 and 4 and the phantom build, 10,240 for setting 3. Setting 2 is
// the default build and is covered by tb_bf_full.
module tb_bf_settings;
  logic clk = 0;
  logic d1, d3, d4, dp;
  int c1, c3, c4, cp, f1, f3, f4, fp;
  always #5 clk = ~clk;

  bf_setting_run #(.W(64),  .F(32), .FS(4),  .R(1), .NAME("setting 1")) u_s1 (.clk, .done(d1), .checks(c1), .failures(f1));
  bf_setting_run #(.W(128), .F(64), .FS(16), .R(1), .NAME("setting 3")) u_s3 (.clk, .done(d3), .checks(c3), .failures(f3));
  bf_setting_run #(.W(128), .F(64), .FS(8),  .R(2), .NAME("setting 4")) u_s4 (.clk, .done(d4), .checks(c4), .failures(f4));

  bf_setting_run #(.W(128), .F(64), .FS(8), .R(1), .MDR(320), .MTD_MAX(512), .PITCH(12.2),
                   .THETA_DEG(18.0), .NAME("phantom 18 deg")) u_ph (.clk, .done(dp), .checks(cp), .failures(fp));

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c3 + c4 + cp, f1 + f3 + f4 + fp + 1);
    $finish;
  end

  initial begin
    wait (d1 && d3 && d4 && dp);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c3 + c4 + cp, f1 + f3 + f4 + fp);
    $finish;
  end
endmodule
