// tb_classifier: random binary weights and codes; checks the arg-max class,
// its score and the run time (NCLS + 2 cycles), including a forced tie.
module tb_classifier;
  import nqe_ref_pkg::*;
  localparam int C = 64, NC = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [C-1:0] code, wl_data, word;
  logic [3:0] class_idx, wl_addr;
  logic signed [7:0] best_score;
  logic wl_we;

  classifier #(.C(C), .NC(NC)) dut (.clk, .rst_n, .start, .busy, .done, .code,
    .class_idx, .best_score, .wl_we, .wl_addr, .wl_data);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int wc[$], cv[$];
    int best, exp_idx, cyc;
    int idx_seen[NC];
    start = 0; wl_we = 0; wl_addr = 0; wl_data = 0; code = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      wc = {}; cv = {};
      for (int k = 0; k < NC; k++) begin
        for (int c = 0; c < C; c++) begin
          int w;
          w = rand_w(1); wc.push_back(w); word[c] = (w > 0);
        end
        if (run == 5 && k == 7) begin        // tie between classes 3 and 7
          for (int c = 0; c < C; c++) begin wc[7*C + c] = wc[3*C + c]; word[c] = (wc[3*C + c] > 0); end
        end
        @(negedge clk); wl_we = 1; wl_addr = 4'(k); wl_data = word;
      end
      @(negedge clk); wl_we = 0;
      for (int c = 0; c < C; c++) begin
        cv.push_back(int'($urandom_range(0, 1))); code[c] = 1'(cv[c]);
      end
      if (run == 5) for (int c = 0; c < C; c++) begin   // make class 3 (= 7) the winner
        cv[c] = (wc[3*C + c] > 0) ? 1 : 0; code[c] = 1'(cv[c]);
      end
      exp_idx = classify_ref(cv, C, NC, wc, best);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (cyc != NC + 2) begin failures++; $display("FAIL run time %0d", cyc); end
      if (int'(class_idx) != exp_idx) begin
        failures++; $display("FAIL run %0d idx %0d exp %0d", run, class_idx, exp_idx);
      end
      if (int'(best_score) != best) begin
        failures++; $display("FAIL run %0d score %0d exp %0d", run, best_score, best);
      end
      idx_seen[class_idx]++;
      if (run == 5) begin
        checks++;
        if (class_idx != 4'd3) begin failures++; $display("FAIL tie not resolved to 3"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
