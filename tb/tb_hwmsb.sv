// tb_hwmsb: exhaustive-ish check of the HWMSB activation against a
// threshold-comparison reference, for every reference position 0..15 and
// accumulator values around each threshold plus random values.
module tb_hwmsb;
  import nqe_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [23:0] acc;
  logic [3:0] ref_pos;
  logic [1:0] code;

  hwmsb #(.ACC_W(24), .REF_W(4)) dut (.acc(acc), .ref_pos(ref_pos), .code(code));

  task automatic check(int a, int r);
    int exp;
    acc = 24'(a); ref_pos = 4'(r);
    #1;
    exp = hwmsb_ref(longint'(a), r);
    checks++;
    if (int'(code) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL acc=%0d ref=%0d code=%0d exp=%0d", a, r, code, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen[4];
    for (int r = 0; r < 16; r++) begin
      for (int k = -2; k <= 2; k++) begin
        check((1 << r) + k, r);
        if (r >= 1) check((1 << (r - 1)) + k, r);
        if (r >= 2) check((1 << (r - 2)) + k, r);
        check(-(1 << r) + k, r);
      end
      check(0, r);
      check(-1, r);
      check(8388607, r);
      check(-8388608, r);
    end
    for (int i = 0; i < 4000; i++) begin
      int a;
      a = int'($urandom_range(0, 1 << 18)) - (1 << 16);
      check(a, int'($urandom_range(0, 15)));
      seen[code]++;
    end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (seen[c] == 0) begin failures++; $display("code %0d never produced", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
