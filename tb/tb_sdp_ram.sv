// tb_sdp_ram: checks write/read and the read-first behaviour of sdp_ram
// against a plain array kept by the testbench.
module tb_sdp_ram;
  localparam int WIDTH = 16, DEPTH = 24;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_d;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = a[$clog2(DEPTH)-1:0]; wdata = WIDTH'($urandom);
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random mixed traffic, including same-address read and write
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      re = 1; raddr = $clog2(DEPTH)'($urandom_range(DEPTH-1));
      we = $urandom_range(1); waddr = ($urandom_range(3) == 0) ? raddr : $clog2(DEPTH)'($urandom_range(DEPTH-1));
      wdata = WIDTH'($urandom);
      exp_d = ref_mem[raddr];
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        if (failures < 5) $display("mismatch addr %0d got %h exp %h", raddr, rdata, exp_d);
      end
    end
    // read register holds while re is low
    @(negedge clk); re = 0; we = 1; waddr = raddr; wdata = ~rdata;
    exp_d = rdata;
    repeat (3) @(posedge clk);
    #1 checks++; if (rdata !== exp_d) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
