// tb_window_cache: window register array.  Feeds every row with its own
// random sequence under random advance gaps and checks that win[i][j]
// holds the value fed to row i (WIN-1-j) advances ago.
module tb_window_cache;
  localparam int WIN = 7, PIX_W = 8;
  logic clk = 0, advance = 0;
  logic [PIX_W-1:0] row_in [WIN];
  logic [PIX_W-1:0] win [WIN][WIN];
  int hist [WIN][$];
  int checks = 0, failures = 0;

  window_cache #(.WIN(WIN), .PIX_W(PIX_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < WIN; i++) row_in[i] = '0;
    for (int n = 0; n < 800; n++) begin
      @(negedge clk);
      if (hist[0].size() >= WIN) begin
        for (int i = 0; i < WIN; i++)
          for (int j = 0; j < WIN; j++) begin
            checks++;
            if (int'(win[i][j]) != hist[i][hist[i].size() - WIN + j]) begin
              failures++;
              if (failures < 10) $display("FAIL win[%0d][%0d]", i, j);
            end
          end
      end
      advance = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < WIN; i++) begin
        row_in[i] = PIX_W'($urandom_range(0, 255));
        if (advance) hist[i].push_back(int'(row_in[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
