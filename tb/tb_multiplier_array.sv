// tb_multiplier_array: pipelined multipliers.  Drives random pixels and
// signed coefficients (including the extreme values) every cycle with a
// random valid bit and checks each product, the valid bit and the tag
// exactly three cycles later.
module tb_multiplier_array;
  localparam int NTAP = 9, PIX_W = 8, COEF_W = 15, TAG_W = 3, PROD_W = PIX_W + COEF_W;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [TAG_W-1:0] in_tag = '0, out_tag;
  logic [PIX_W-1:0] pix [NTAP];
  logic signed [COEF_W-1:0] coef [NTAP];
  logic signed [PROD_W-1:0] prod [NTAP];
  longint exp_p [$];   // NTAP products per input vector, in order
  bit exp_v [$];
  int exp_t [$];
  int checks = 0, failures = 0;

  multiplier_array #(.NTAP(NTAP), .PIX_W(PIX_W), .COEF_W(COEF_W), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NTAP; k++) begin pix[k] = '0; coef[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      // outputs now belong to the inputs applied three cycles earlier
      if (exp_v.size() == 3) begin
        bit v;
        int t;
        v = exp_v.pop_front(); t = exp_t.pop_front();
        checks++;
        if (out_valid != v) failures++;
        if (v) begin
          checks++;
          if (int'(out_tag) != t) failures++;
        end
        for (int k = 0; k < NTAP; k++) begin
          longint e;
          e = exp_p.pop_front();
          if (v) begin
            checks++;
            if (longint'(prod[k]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL n=%0d k=%0d %0d exp %0d", n, k, prod[k], e);
            end
          end
        end
      end
      in_valid = ($urandom_range(0, 1) != 0);
      in_tag = TAG_W'($urandom_range(0, 7));
      for (int k = 0; k < NTAP; k++) begin
        int c;
        pix[k] = (n % 7 == 0) ? 8'hff : PIX_W'($urandom_range(0, 255));
        c = (n % 5 == 0) ? -(1 << (COEF_W - 1)) : int'($urandom_range(0, 32767)) - 16384;
        coef[k] = COEF_W'(c);
        exp_p.push_back(longint'(pix[k]) * longint'(c));
      end
      exp_v.push_back(in_valid);
      exp_t.push_back(int'(in_tag));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
