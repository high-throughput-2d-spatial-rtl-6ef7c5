// tb_adder_tree: pipelined adder tree with the default 49 operands.  Drives
// random signed operands (and all-maximum / all-minimum vectors) every cycle
// and checks the sum, the valid bit and the tag exactly ceil(log2 49) = 6
// cycles later.
module tb_adder_tree;
  localparam int N = 49, IN_W = 23, TAG_W = 3, LEVELS = 6, OUT_W = IN_W + LEVELS;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [TAG_W-1:0] in_tag = '0, out_tag;
  logic signed [IN_W-1:0] opnd [N];
  logic signed [OUT_W-1:0] sum;
  longint exp_s [$];
  bit exp_v [$];
  int exp_t [$];
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IN_W(IN_W), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) opnd[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 800; n++) begin
      longint s;
      @(negedge clk);
      if (exp_v.size() == LEVELS) begin
        bit v;
        longint e;
        int t;
        v = exp_v.pop_front(); e = exp_s.pop_front(); t = exp_t.pop_front();
        checks++;
        if (out_valid != v) begin failures++; $display("FAIL valid n=%0d", n); end
        if (v) begin
          checks += 2;
          if (longint'(sum) != e) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d sum %0d exp %0d", n, sum, e);
          end
          if (int'(out_tag) != t) failures++;
        end
      end
      in_valid = ($urandom_range(0, 1) != 0);
      in_tag = TAG_W'($urandom_range(0, 7));
      s = 0;
      for (int k = 0; k < N; k++) begin
        longint v;
        if (n % 11 == 3) v = (1 << (IN_W - 1)) - 1;
        else if (n % 11 == 7) v = -(1 << (IN_W - 1));
        else v = longint'($urandom_range(0, (1 << IN_W) - 1)) - (1 << (IN_W - 1));
        opnd[k] = IN_W'(v);
        s += v;
      end
      exp_s.push_back(s);
      exp_v.push_back(in_valid);
      exp_t.push_back(int'(in_tag));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
