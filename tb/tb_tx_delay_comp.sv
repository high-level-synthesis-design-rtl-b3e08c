// tb_tx_delay_comp: streams frames through tx_delay_comp with a fixed set of
// per-channel sample removals (including N_remove = 0 and N_remove = MTD) and
// checks that output row m of channel c is input row m + N_remove[c] of the
// same frame (zero past the frame end). The first two frames run at full
// rate, back to back, and the spacing of output rows is checked to be
// K = F/F_SUB cycles through both frames and across their boundary. Once the
// input rows that the second frame's output needs have been sent, the third
// frame runs with random valid/ready gaps. The input then idles for a while,
// so the stage must finish frame three on its own with zero-row steps (a
// flush) before frame four starts a new stream; frame four ends the same way,
// so two flushes are expected.
module tb_tx_delay_comp;
  import bf_pkg::*;
  localparam int W = 8, F = 8, FS = 2, K = F/FS, D = 12, MTDM = 8, FRAMES = 4;
  localparam int PW = $clog2(MTDM+1);
  logic clk = 0, rst_n = 0;
  logic [PW-1:0] cfg_mtd;
  logic [PW-1:0] cfg_n_remove [W];
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  sample_t [W-1:0] in_row, out_row;
  int checks = 0, failures = 0;
  int din [FRAMES][D][W];
  int nrem [W] = '{0, 3, 5, 1, 5, 2, 4, 0};
  localparam int MTD = 5;
  bit random_phase = 0, in_random = 0;
  int flushes = 0;

  tx_delay_comp #(.W_I(W), .F(F), .F_SUB(FS), .D(D), .MTD_MAX(MTDM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_mtd = PW'(MTD);
    for (int c = 0; c < W; c++) cfg_n_remove[c] = PW'(nrem[c]);
    for (int f = 0; f < FRAMES; f++)
      for (int m = 0; m < D; m++)
        for (int c = 0; c < W; c++) din[f][m][c] = int'($signed(16'($urandom)));
  end

  int sent = 0;
  initial begin
    in_row = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    while (sent < FRAMES*D) begin
      @(negedge clk);
      if (sent == 3*D) begin
        in_valid = 0;
        repeat (60) @(negedge clk);
      end
      in_valid = in_random ? ($urandom_range(2) != 0) : 1'b1;
      for (int c = 0; c < W; c++) in_row[c] = sample_t'(din[sent / D][sent % D][c]);
      @(posedge clk);
      if (in_valid && in_ready) sent++;
      if (sent == 2*D + MTD) in_random = 1;
    end
    @(negedge clk); in_valid = 0;
  end

  always @(negedge clk) out_ready = random_phase ? ($urandom_range(3) != 0) : 1'b1;

  int got = 0, last_t = -1, t = 0;
  always @(posedge clk) t++;
  always @(posedge clk) if (rst_n && dut.start_fl && !dut.fl_q) flushes++;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int f, m;
    f = got / D; m = got % D;
    for (int c = 0; c < W; c++) begin
      int e;
      e = (m + nrem[c] < D) ? din[f][m + nrem[c]][c] : 0;
      checks++;
      if (int'(out_row[c]) != e) begin
        failures++;
        if (failures < 6) $display("f%0d row %0d ch %0d got %0d exp %0d", f, m, c, out_row[c], e);
      end
    end
    if (f < 2 && got > 0) begin
      checks++;
      if (t - last_t != K) begin
        failures++;
        $display("row spacing %0d, expected %0d at output row %0d", t - last_t, K, got);
      end
    end
    last_t = t;
    got++;
    if (got == 2*D) random_phase = 1;
    if (got == FRAMES*D) begin
      checks++;
      if (flushes != 2) begin
        failures++;
        $display("flushes %0d, expected 2", flushes);
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
