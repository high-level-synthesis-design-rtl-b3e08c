// tb_rf_buffer: writes a long run of rows into the cyclic buffer and reads
// back random rows among the last MDR written, checking the modulo-MDR
// addressing and the registered read.
module tb_rf_buffer;
  import bf_pkg::*;
  localparam int W = 4, MDR = 5, N = 40;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [IDX_W-1:0] wr_idx = '0, rd_idx = '0;
  sample_t [W-1:0] wr_row = '0, rd_row;
  int checks = 0, failures = 0;
  int rows [N][W];

  rf_buffer #(.W_I(W), .MDR(MDR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N; r++) for (int c = 0; c < W; c++) rows[r][c] = int'($signed(16'($urandom)));
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = IDX_W'(r);
      for (int c = 0; c < W; c++) wr_row[c] = sample_t'(rows[r][c]);
      // read a row written earlier that is still inside the window
      rd_en = (r > 0);
      if (r > 0) rd_idx = IDX_W'($urandom_range(r-1, (r >= MDR-1) ? r-(MDR-1) : 0));
      @(posedge clk); #1;
      if (r > 0) begin
        for (int c = 0; c < W; c++) begin
          checks++;
          if (int'(rd_row[c]) != rows[rd_idx][c]) begin
            failures++;
            if (failures < 5) $display("row %0d ch %0d got %0d exp %0d", rd_idx, c, rd_row[c], rows[rd_idx][c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
