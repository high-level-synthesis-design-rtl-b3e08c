// bf_top: single-device ultrafast plane-wave receive beamformer.
//
// Raw RF rows (one 16-bit sample per receive channel, one row per fast-time
// sample) stream in; beamformed rows (one signed sum per output A-line, one
// row per interpolated depth) stream out. The chain is
//
//   lin_interp      x2 interpolation in fast time (D_RAW -> D = 2*D_RAW rows)
//   tx_delay_comp   drops the first N_remove[n] samples of each channel, so
//                   the transmit delay no longer depends on the element
//   das_core x R    delay-and-sum with a shared, compressed delay profile;
//                   one depth row per F/F_SUB cycles
//
// R identical cores, each with its own delay profile (built for a different
// starting lateral position), give W_O = W_I*R output A-lines; output column
// x*R + r comes from core r. The cores see the same RF rows and move in step:
// a row is handed over when all cores can take it, and a beamformed row is
// released when all cores have one. With the defaults (W_I = 128, F = 64,
// F_SUB = 8, R = 1) a frame of 1,280 raw rows is 2,560 depths of 8 cycles,
// and frames offered back to back leave back to back, 20,480 cycles apart.
//
// Configuration: cfg_mtd and cfg_n_remove set the transmit compensation of
// the current steering angle. They may change only while the transmit stage
// restarts its stream, i.e. after the input has paused at a frame boundary
// and the last frame has been finished (see tx_delay_comp). The delay
// profile of core dp_sel is loaded as a stream of words (dp_restart pulse
// first); dp_done is high when every core has a full profile. All streams are
// valid/ready; ready outputs do not depend on the matching valid.
module bf_top
  import bf_pkg::*;
#(
  parameter int unsigned W_I     = 128,
  parameter int unsigned F       = 64,
  parameter int unsigned F_SUB   = 8,
  parameter int unsigned R       = 1,
  parameter int unsigned D_RAW   = 1280,
  parameter int unsigned MDR     = 150,
  parameter int unsigned MTD_MAX = 256,
  localparam int unsigned D      = 2 * D_RAW,
  localparam int unsigned W_O    = W_I * R,
  localparam int unsigned OW     = SAMPLE_W + $clog2(F) + 1,
  localparam int unsigned SW     = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned PW     = $clog2(MTD_MAX + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // transmit compensation of the current angle
  input  logic [PW-1:0]                 cfg_mtd,
  input  logic [PW-1:0]                 cfg_n_remove [W_I],
  // delay profile loading
  input  logic                          dp_restart,
  input  logic                          dp_valid,
  input  logic [SW-1:0]                 dp_sel,
  input  delay_t [F_SUB-1:0]            dp_data,
  output logic                          dp_done,
  // raw RF rows
  input  logic                          raw_valid,
  output logic                          raw_ready,
  input  sample_t [W_I-1:0]             raw_row,
  // beamformed rows
  output logic                          bf_valid,
  input  logic                          bf_ready,
  output logic signed [W_O-1:0][OW-1:0] bf_row,
  output logic                          frame_done
);
  logic              i_valid, i_ready, t_valid, t_ready;
  sample_t [W_I-1:0] i_row, t_row;

  logic [R-1:0] c_in_ready, c_out_valid, c_ld_done, c_frame_done;
  logic signed [W_I-1:0][OW-1:0] c_row [R];

  lin_interp #(.W_I(W_I), .D_RAW(D_RAW)) u_interp (
    .clk, .rst_n,
    .in_valid  (raw_valid),
    .in_ready  (raw_ready),
    .in_row    (raw_row),
    .out_valid (i_valid),
    .out_ready (i_ready),
    .out_row   (i_row)
  );

  tx_delay_comp #(.W_I(W_I), .F(F), .F_SUB(F_SUB), .D(D), .MTD_MAX(MTD_MAX)) u_tx (
    .clk, .rst_n, .cfg_mtd, .cfg_n_remove,
    .in_valid  (i_valid),
    .in_ready  (i_ready),
    .in_row    (i_row),
    .out_valid (t_valid),
    .out_ready (t_ready),
    .out_row   (t_row)
  );

  assign t_ready = &c_in_ready;

  for (genvar r = 0; r < R; r++) begin : g_core
    das_core #(.W_I(W_I), .F(F), .F_SUB(F_SUB), .D(D), .MDR(MDR)) u_core (
      .clk, .rst_n,
      .ld_restart (dp_restart),
      .ld_valid   (dp_valid && (R == 1 || dp_sel == SW'(r))),
      .ld_data    (dp_data),
      .ld_done    (c_ld_done[r]),
      .in_valid   (t_valid && t_ready),
      .in_ready   (c_in_ready[r]),
      .in_row     (t_row),
      .out_valid  (c_out_valid[r]),
      .out_ready  (bf_valid && bf_ready),
      .out_row    (c_row[r]),
      .frame_done (c_frame_done[r])
    );
  end

  assign dp_done    = &c_ld_done;
  assign bf_valid   = &c_out_valid;
  assign frame_done = c_frame_done[0];

  always_comb begin
    for (int x = 0; x < W_I; x++)
      for (int r = 0; r < R; r++)
        bf_row[x * R + r] = c_row[r][x];
  end
endmodule
