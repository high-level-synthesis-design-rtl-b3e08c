// tb_delay_profile_mem: loads a random profile (random aperture masks, some
// depths fully masked), reads every word back and checks the per-depth
// lower/upper index bounds against values computed here. A second load after
// ld_restart checks that the address starts over.
module tb_delay_profile_mem;
  import bf_pkg::*;
  localparam int F = 8, FS = 4, K = F/FS, D = 6, WORDS = D*K;
  logic clk = 0, rst_n = 0, ld_restart = 0, ld_valid = 0, ld_done, rd_en = 0;
  delay_t [FS-1:0] ld_data = '0, rd_data;
  logic [$clog2(WORDS)-1:0] rd_addr = '0;
  logic [$clog2(D)-1:0] bnd_z = '0;
  logic [IDX_W-1:0] bnd_lo, bnd_hi;
  int checks = 0, failures = 0;
  delay_t prof [D][F];

  delay_profile_mem #(.F(F), .F_SUB(FS), .D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_and_check();
    int lo_e, hi_e, last_lo;
    for (int z = 0; z < D; z++)
      for (int j = 0; j < F; j++) begin
        prof[z][j].idx = IDX_W'($urandom_range(3000));
        prof[z][j].en  = (z == 2) ? 1'b0 : 1'($urandom_range(3) != 0);
      end
    @(negedge clk); ld_restart = 1; @(negedge clk); ld_restart = 0;
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      while ($urandom_range(2) == 0) begin ld_valid = 0; @(negedge clk); end
      ld_valid = 1;
      for (int s = 0; s < FS; s++) ld_data[s] = prof[w / K][(w % K) * FS + s];
      check(!ld_done || w == 0, "ld_done early");
    end
    @(negedge clk); ld_valid = 0;
    check(ld_done, "ld_done");
    last_lo = 0;
    for (int z = 0; z < D; z++) begin
      bit any;
      any = 0;
      for (int j = 0; j < F; j++) if (prof[z][j].en) begin
        if (!any || prof[z][j].idx < lo_e) lo_e = prof[z][j].idx;
        if (!any || prof[z][j].idx > hi_e) hi_e = prof[z][j].idx;
        any = 1;
      end
      if (!any) begin lo_e = last_lo; hi_e = last_lo; end
      last_lo = lo_e;
      bnd_z = $clog2(D)'(z); #1;
      check(int'(bnd_lo) == lo_e && int'(bnd_hi) == hi_e, $sformatf("bounds z%0d %0d/%0d exp %0d/%0d", z, bnd_lo, bnd_hi, lo_e, hi_e));
    end
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk); rd_en = 1; rd_addr = $clog2(WORDS)'(w);
      @(posedge clk); #1;
      for (int s = 0; s < FS; s++)
        check(rd_data[s] == prof[w / K][(w % K) * FS + s], $sformatf("word %0d slot %0d", w, s));
    end
    @(negedge clk); rd_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    load_and_check();
    load_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
