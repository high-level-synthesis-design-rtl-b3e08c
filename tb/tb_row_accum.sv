// tb_row_accum: feeds K partial rows per depth with random gaps and output
// back-pressure; the finished row must equal the sum over k of the partial
// rows shifted by k*F_SUB - F/2, computed here directly.
module tb_row_accum;
  import bf_pkg::*;
  localparam int W = 8, F = 8, FS = 2, K = F/FS;
  localparam int PW = SAMPLE_W + $clog2(FS) + 1, OW = SAMPLE_W + $clog2(F) + 1;
  localparam int KW = $clog2(K), NP = W + FS - 1, ROWS = 30;
  logic clk = 0, rst_n = 0, en, in_valid = 0, in_last = 0, out_valid, out_ready = 1;
  logic [KW-1:0] in_k = '0;
  logic signed [NP-1:0][PW-1:0] p = '0;
  logic signed [W-1:0][OW-1:0] out_row;
  int checks = 0, failures = 0;
  int exp_q [$];

  assign en = !(out_valid && !out_ready);
  row_accum #(.W_I(W), .F(F), .F_SUB(FS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pv [K][NP];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int k = 0; k < K; k++) for (int i = 0; i < NP; i++) pv[k][i] = $urandom_range(2**(PW-1)-1) - 2**(PW-2);
      for (int x = 0; x < W; x++) begin
        int e;
        e = 0;
        for (int k = 0; k < K; k++) begin
          int i;
          i = x + k*FS - F/2 + FS - 1;
          if (i >= 0 && i < NP) e += pv[k][i];
        end
        exp_q.push_back(e);
      end
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_k = KW'(k); in_last = (k == K-1);
        for (int i = 0; i < NP; i++) p[i] = PW'(pv[k][i]);
        @(posedge clk);
        while (!en) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(2) != 0);

  int got = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int x = 0; x < W; x++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'($signed(out_row[x])) != e) begin
        failures++;
        if (failures < 5) $display("row %0d x %0d got %0d exp %0d", got, x, $signed(out_row[x]), e);
      end
    end
    got++;
    if (got == ROWS) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
