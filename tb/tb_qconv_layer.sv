// tb_qconv_layer: runs four layer configurations that cover the encoder's
// layer types: 8-bit pixels x quinary weights with biases and Sign; Sign x
// quinary with HWMSB and 2x2 pooling; HWMSB codes x ternary with Sign; and a
// 4-group binary group convolution with Heaviside, pooling and channel
// shuffle. Each is compared code by code with the reference model and its
// run time is checked.
module tb_qconv_layer;
  import nqe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int c[4], f[4];
  bit fin[4];
  int seen0[4], seen1[4], seen2[4], seen3[4];

  qconv_harness #(.H(8), .CIN(3), .COUT(4), .G(1), .WBITS(3), .AKIND(ACT_PIX8),
                  .OKIND(OUT_SIGN), .POOL(1'b0), .HAS_BIAS(1'b1)) h0 (
    .clk, .rst_n, .checks(c[0]), .failures(f[0]), .fin(fin[0]), .codes_seen(seen0));
  qconv_harness #(.H(8), .CIN(8), .COUT(4), .G(1), .WBITS(3), .AKIND(ACT_SIGN),
                  .OKIND(OUT_HWMSB), .POOL(1'b1), .HAS_BIAS(1'b0), .REFP(2)) h1 (
    .clk, .rst_n, .checks(c[1]), .failures(f[1]), .fin(fin[1]), .codes_seen(seen1));
  qconv_harness #(.H(4), .CIN(8), .COUT(8), .G(1), .WBITS(2), .AKIND(ACT_CODE2),
                  .OKIND(OUT_SIGN), .POOL(1'b0), .HAS_BIAS(1'b0)) h2 (
    .clk, .rst_n, .checks(c[2]), .failures(f[2]), .fin(fin[2]), .codes_seen(seen2));
  qconv_harness #(.H(4), .CIN(16), .COUT(16), .G(4), .WBITS(1), .AKIND(ACT_SIGN),
                  .OKIND(OUT_HEAV), .POOL(1'b1), .HAS_BIAS(1'b0)) h3 (
    .clk, .rst_n, .checks(c[3]), .failures(f[3]), .fin(fin[3]), .codes_seen(seen3));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int i = 0; i < 4; i++) begin checks += c[i]; failures += f[i]; end
    // every HWMSB code and both Sign / Heaviside values must have occurred
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen1[k] == 0) begin failures++; $display("HWMSB code %0d never seen", k); end
    end
    for (int k = 0; k < 2; k++) begin
      checks += 2;
      if (seen0[k] == 0) begin failures++; $display("Sign %0d never seen", k); end
      if (seen3[k] == 0) begin failures++; $display("Heaviside %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
