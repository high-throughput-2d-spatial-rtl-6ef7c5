// tb_coef_file: coefficient register file.  Checks the reset value, writes
// random coefficients in random order (including rewrites), checks that a
// write is visible the cycle after it and that no other register changes,
// and that an address beyond the last coefficient is ignored.
module tb_coef_file;
  localparam int WIN = 7, COEF_W = 15, NTAP = WIN * WIN, AW = $clog2(NTAP);
  logic clk = 0, rst_n = 0, we = 0;
  logic [AW-1:0] waddr = '0;
  logic signed [COEF_W-1:0] wdata = '0;
  logic signed [COEF_W-1:0] coef [NTAP];
  int model [NTAP];
  int checks = 0, failures = 0;

  coef_file #(.WIN(WIN), .COEF_W(COEF_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic compare_all(input string when);
    for (int k = 0; k < NTAP; k++) begin
      checks++;
      if (int'(coef[k]) != model[k]) begin
        failures++;
        if (failures < 10) $display("FAIL %s: coef[%0d]=%0d exp %0d", when, k, coef[k], model[k]);
      end
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NTAP; k++) model[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare_all("reset");
    for (int n = 0; n < 300; n++) begin
      int a, v;
      a = int'($urandom_range(0, (1 << AW) - 1));
      v = int'($urandom_range(0, (1 << COEF_W) - 1)) - (1 << (COEF_W - 1));
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0);
      waddr = AW'(a);
      wdata = COEF_W'(v);
      @(negedge clk);
      if (we && a < NTAP) model[a] = v;
      we = 0;
      compare_all("write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
