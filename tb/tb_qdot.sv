// tb_qdot: random checks of the multiplier-free dot product for every
// weight precision / activation kind pair used by the encoder layers.
module tb_qdot;
  import nqe_pkg::*;
  import nqe_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 16;

  // quinary x pixel, quinary x sign, ternary x code2, ternary x sign,
  // binary x code2, binary x sign, binary x heaviside
  logic [N*8-1:0] a_pix;   logic [N*3-1:0] w_q1; logic signed [23:0] s1;
  logic [N-1:0]   a_sgn2;  logic [N*3-1:0] w_q2; logic signed [23:0] s2;
  logic [N*2-1:0] a_c3;    logic [N*2-1:0] w_t3; logic signed [23:0] s3;
  logic [N-1:0]   a_sgn4;  logic [N*2-1:0] w_t4; logic signed [23:0] s4;
  logic [N*2-1:0] a_c5;    logic [N-1:0]   w_b5; logic signed [23:0] s5;
  logic [N-1:0]   a_sgn6;  logic [N-1:0]   w_b6; logic signed [23:0] s6;
  logic [N-1:0]   a_h7;    logic [N-1:0]   w_b7; logic signed [23:0] s7;
  logic en;

  qdot #(.N(N), .WBITS(3), .AKIND(ACT_PIX8))  d1 (.act(a_pix),  .wgt(w_q1), .en(en), .sum(s1));
  qdot #(.N(N), .WBITS(3), .AKIND(ACT_SIGN))  d2 (.act(a_sgn2), .wgt(w_q2), .en(en), .sum(s2));
  qdot #(.N(N), .WBITS(2), .AKIND(ACT_CODE2)) d3 (.act(a_c3),   .wgt(w_t3), .en(en), .sum(s3));
  qdot #(.N(N), .WBITS(2), .AKIND(ACT_SIGN))  d4 (.act(a_sgn4), .wgt(w_t4), .en(en), .sum(s4));
  qdot #(.N(N), .WBITS(1), .AKIND(ACT_CODE2)) d5 (.act(a_c5),   .wgt(w_b5), .en(en), .sum(s5));
  qdot #(.N(N), .WBITS(1), .AKIND(ACT_SIGN))  d6 (.act(a_sgn6), .wgt(w_b6), .en(en), .sum(s6));
  qdot #(.N(N), .WBITS(1), .AKIND(ACT_HEAV))  d7 (.act(a_h7),   .wgt(w_b7), .en(en), .sum(s7));

  task automatic cmp(string nm, logic signed [23:0] got, int exp);
    checks++;
    if (int'(got) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", nm, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      int e[8];
      for (int k = 0; k < 8; k++) e[k] = 0;
      for (int i = 0; i < N; i++) begin
        int wv, av;
        wv = rand_w(3); av = int'($urandom_range(0, 255));
        w_q1[i*3 +: 3] = w_code(wv, 3); a_pix[i*8 +: 8] = 8'(av); e[1] += wv * av;
        wv = rand_w(3); av = rand_w(1);
        w_q2[i*3 +: 3] = w_code(wv, 3); a_sgn2[i] = (av > 0); e[2] += wv * av;
        wv = rand_w(2); av = int'($urandom_range(0, 3));
        w_t3[i*2 +: 2] = 2'(w_code(wv, 2)); a_c3[i*2 +: 2] = 2'(av); e[3] += wv * av;
        wv = rand_w(2); av = rand_w(1);
        w_t4[i*2 +: 2] = 2'(w_code(wv, 2)); a_sgn4[i] = (av > 0); e[4] += wv * av;
        wv = rand_w(1); av = int'($urandom_range(0, 3));
        w_b5[i] = (wv > 0); a_c5[i*2 +: 2] = 2'(av); e[5] += wv * av;
        wv = rand_w(1); av = rand_w(1);
        w_b6[i] = (wv > 0); a_sgn6[i] = (av > 0); e[6] += wv * av;
        wv = rand_w(1); av = int'($urandom_range(0, 1));
        w_b7[i] = (wv > 0); a_h7[i] = 1'(av); e[7] += wv * av;
      end
      en = (it % 10 != 9);
      #1;
      if (!en) for (int k = 1; k < 8; k++) e[k] = 0;
      cmp("q*pix", s1, e[1]); cmp("q*sign", s2, e[2]); cmp("t*code", s3, e[3]);
      cmp("t*sign", s4, e[4]); cmp("b*code", s5, e[5]); cmp("b*sign", s6, e[6]);
      cmp("b*heav", s7, e[7]);
    end
    // extreme: all +2 x 255
    w_q1 = {N{3'b010}}; a_pix = '1; en = 1; #1; cmp("q*pix max", s1, 2 * 255 * N);
    w_q1 = {N{3'b110}}; #1; cmp("q*pix min", s1, -2 * 255 * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
