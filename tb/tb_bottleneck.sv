// tb_bottleneck: loads random binary depthwise and FC weights, presents
// random 4x4xC Heaviside maps, and checks the C-bit code and the run time
// (16 + C + 2 cycles) against the reference model.
module tb_bottleneck;
  import nqe_ref_pkg::*;
  localparam int C = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [3:0] in_raddr;
  logic [C-1:0] in_rdata, code;
  logic [C-1:0] inmem [16];
  logic dw_we, fc_we;
  logic [3:0] dw_addr;
  logic [$clog2(C)-1:0] fc_addr;
  logic [C-1:0] dw_data, fc_data, word;

  always_ff @(posedge clk) in_rdata <= inmem[in_raddr];

  bottleneck #(.C(C)) dut (.clk, .rst_n, .start, .busy, .done, .in_raddr, .in_rdata,
    .code, .dw_we, .dw_addr, .dw_data, .fc_we, .fc_addr, .fc_data);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int act[$], dw[$], fc[$], exp_code[$];
    int ones, zeros;
    start = 0; dw_we = 0; fc_we = 0; dw_addr = 0; fc_addr = 0; dw_data = 0; fc_data = 0;
    ones = 0; zeros = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      act = {}; dw = {}; fc = {};
      for (int p = 0; p < 16; p++) begin
        for (int c = 0; c < C; c++) begin
          int v, w;
          v = int'($urandom_range(0, 1)); act.push_back(v); inmem[p][c] = 1'(v);
          w = rand_w(1); dw.push_back(w); word[c] = (w > 0);
        end
        @(negedge clk); dw_we = 1; dw_addr = 4'(p); dw_data = word;
      end
      @(negedge clk); dw_we = 0;
      for (int j = 0; j < C; j++) begin
        for (int c = 0; c < C; c++) begin
          int w;
          w = rand_w(1); fc.push_back(w); word[c] = (w > 0);
        end
        @(negedge clk); fc_we = 1; fc_addr = 5'(j); fc_data = word;
      end
      @(negedge clk); fc_we = 0;
      bottleneck_ref(act, C, dw, fc, exp_code);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      begin
        int cyc;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 16 + C + 2) begin
          failures++; $display("FAIL run time %0d expected %0d", cyc, 16 + C + 2);
        end
      end
      @(negedge clk);
      for (int j = 0; j < C; j++) begin
        checks++;
        if (int'(code[j]) != exp_code[j]) begin
          failures++;
          if (failures < 8) $display("FAIL run %0d bit %0d got %0d exp %0d", run, j, code[j], exp_code[j]);
        end
        if (code[j]) ones++; else zeros++;
      end
    end
    checks++;
    if (ones == 0 || zeros == 0) begin failures++; $display("FAIL code is constant"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
