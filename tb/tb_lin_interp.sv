// tb_lin_interp: drives raw frames with random valid/ready gaps through
// lin_interp and compares every output row with r0, (r0+r1)/2, r1, ...,
// r(last), r(last) computed here. Also checks the 2x row count per frame.
module tb_lin_interp;
  import bf_pkg::*;
  localparam int W = 4, DR = 5, FRAMES = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  sample_t [W-1:0] in_row, out_row;
  int checks = 0, failures = 0;
  int raw [FRAMES*DR][W];
  int exp_q [$];

  lin_interp #(.W_I(W), .D_RAW(DR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected stream
  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < DR; i++) begin
        for (int c = 0; c < W; c++) raw[f*DR+i][c] = int'($signed(16'($urandom)));
      end
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < DR; i++) begin
        for (int c = 0; c < W; c++) exp_q.push_back(raw[f*DR+i][c]);
        for (int c = 0; c < W; c++)
          if (i < DR-1) exp_q.push_back((raw[f*DR+i][c] + raw[f*DR+i+1][c]) >>> 1);
          else          exp_q.push_back(raw[f*DR+i][c]);
      end
  end

  int sent = 0, got = 0;
  initial begin
    in_row = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    while (sent < FRAMES*DR) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      for (int c = 0; c < W; c++) in_row[c] = sample_t'(raw[sent][c]);
      @(posedge clk);
      if (in_valid && in_ready) sent++;
    end
    @(negedge clk); in_valid = 0;
  end

  always @(negedge clk) out_ready = ($urandom_range(2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int c = 0; c < W; c++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out_row[c]) != e) begin
        failures++;
        if (failures < 6) $display("row %0d ch %0d got %0d exp %0d", got, c, out_row[c], e);
      end
    end
    got++;
    if (got == 2*DR*FRAMES) begin
      checks++;
      repeat (20) @(posedge clk);
      if (out_valid) failures++;   // no extra rows
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
