// tb_spatial_filter_workloads: the other image sizes the design is quoted
// for, each with the default 7x7 window and 8-bit pixels on one full frame:
//   - a 100-pixel-wide image, whose first-output latency must be
//     3*100 + 4 + 3 + 6 = 313 cycles,
//   - a Full HD 1920x1080 frame, latency 3*1920 + 13 = 5773 cycles.
// Every output pixel is compared with the golden model.
module tb_spatial_filter_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   done_a, done_b;
  int     checks_a, failures_a, checks_b, failures_b;
  longint lat_a, lat_b;
  int     checks = 0, failures = 0;

  wl_frame_runner #(.IMG_W(100), .IMG_H(100)) u_a (
    .clk, .rst_n, .done(done_a), .checks(checks_a), .failures(failures_a), .latency(lat_a));
  wl_frame_runner #(.IMG_W(1920), .IMG_H(1080)) u_b (
    .clk, .rst_n, .done(done_b), .checks(checks_b), .failures(failures_b), .latency(lat_b));

  initial begin
    repeat (1920 * 1080 + 20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_a && done_b);
    checks = checks_a + checks_b + 4;
    failures = failures_a + failures_b;
    if (checks_a != 100 * 100) failures++;
    if (checks_b != 1920 * 1080) failures++;
    if (lat_a != 313) begin failures++; $display("FAIL latency 100-wide %0d", lat_a); end
    if (lat_b != 5773) begin failures++; $display("FAIL latency 1920-wide %0d", lat_b); end
    $display("latency: 100-wide %0d cycles, 1920-wide %0d cycles", lat_a, lat_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
