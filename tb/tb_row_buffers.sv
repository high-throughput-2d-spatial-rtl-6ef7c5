// tb_row_buffers: line delays.  Streams random pixels with random advance
// gaps and checks that tap[k] always equals the pixel that entered
// (k+1)*IMG_W advances earlier, and that the taps hold while not advancing.
module tb_row_buffers;
  localparam int WIN = 5, PIX_W = 8, IMG_W = 13, NROW = WIN - 1;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [PIX_W-1:0] pix_in = '0;
  logic [PIX_W-1:0] tap [NROW];
  int hist[$];
  int checks = 0, failures = 0;

  row_buffers #(.WIN(WIN), .PIX_W(PIX_W), .IMG_W(IMG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      // taps are combinational: check them against the history
      for (int k = 0; k < NROW; k++) begin
        int d;
        d = (k + 1) * IMG_W;
        if (hist.size() >= d) begin
          checks++;
          if (int'(tap[k]) != hist[hist.size() - d]) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d tap[%0d]=%0d exp %0d", n, k, tap[k],
                                        hist[hist.size() - d]);
          end
        end
      end
      advance = ($urandom_range(0, 4) != 0);
      pix_in = PIX_W'($urandom_range(0, 255));
      if (advance) hist.push_back(int'(pix_in));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
