// tb_diag_sum: random stacked matrices and aperture masks; each diagonal sum
// is compared with a sum computed here over the channels m..m+F_SUB-1.
module tb_diag_sum;
  import bf_pkg::*;
  localparam int W = 8, FS = 3, PW = SAMPLE_W + $clog2(FS) + 1;
  sample_t [FS-1:0][W-1:0] rows;
  logic [FS-1:0] en;
  logic signed [W+FS-2:0][PW-1:0] p;
  int checks = 0, failures = 0;

  diag_sum #(.W_I(W), .F_SUB(FS)) dut (.*);

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int s = 0; s < FS; s++) for (int c = 0; c < W; c++) rows[s][c] = sample_t'($urandom);
      en = (t < 20) ? '1 : FS'($urandom);
      #1;
      for (int i = 0; i < W + FS - 1; i++) begin
        int e;
        e = 0;
        for (int s = 0; s < FS; s++) begin
          int ch;
          ch = i - (FS-1) + s;
          if (ch >= 0 && ch < W && en[s]) e += int'(rows[s][ch]);
        end
        checks++;
        if (int'($signed(p[i])) != e) begin
          failures++;
          if (failures < 5) $display("t%0d i%0d got %0d exp %0d", t, i, $signed(p[i]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
