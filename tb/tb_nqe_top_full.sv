// tb_nqe_top_full: end-to-end test of the encoder + classifier at the default size (F = 64).
//
// Loads a random weight set (all layers, layer-1 biases, BSN shifts) through
// the configuration bus, writes a random 32x32 RGB patch, runs it in classify
// mode and in compress mode, then reloads a second weight set (task switch)
// and runs again. Every run's latent code, class index and score are compared
// with the layer-by-layer reference model, and the run time with the cycle
// formula. It also counts the mechanisms the design has and fails if one never
// happened: classify runs, compress runs, weight reloads, zero padding at the
// patch border, all four HWMSB codes, both Heaviside values after pooling.
module tb_nqe_top_full;
  import nqe_pkg::*;
  import nqe_ref_pkg::*;
  localparam int F = 64;
  localparam int C4 = 4 * F;
  localparam int KW = $clog2(NCLS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pix_we, cfg_we, start, mode, busy, done, class_valid;
  logic [9:0] pix_addr;
  logic [23:0] pix_data;
  cfg_sel_e cfg_sel;
  logic [11:0] cfg_addr;
  logic [C4-1:0] cfg_data, code;
  logic [KW-1:0] class_idx;
  logic signed [$clog2(C4)+1:0] class_score;

  nqe_top dut (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .cfg_we, .cfg_sel, .cfg_addr,
    .cfg_data, .start, .mode, .busy, .done, .code, .class_valid, .class_idx,
    .class_score
  );

  initial begin
    repeat (12000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // layer table: H, CIN, COUT, G, WBITS, output kind, pool
  localparam int NL = 6;
  int L_H[NL]    = '{32, 32, 16, 16, 8, 8};
  int L_CIN[NL]  = '{3, F, F, 2*F, 2*F, 4*F};
  int L_COUT[NL] = '{F, F, 2*F, 2*F, 4*F, 4*F};
  int L_G[NL]    = '{1, 1, 1, 1, 1, 4};
  int L_WB[NL]   = '{3, 3, 2, 2, 1, 1};
  int L_K[NL]    = '{K_SIGN, K_HWMSB, K_SIGN, K_HWMSB, K_SIGN, K_HEAV};
  int L_P[NL]    = '{0, 1, 0, 1, 0, 1};

  int W[NL][$];
  int bias[$], dw[$], fc[$], wc[$];
  int ref2, ref4;
  int n_classify = 0, n_compress = 0, n_reload = 0, n_pad = 0;
  int hw_seen[4], heav_seen[2];

  task automatic cfg_write(cfg_sel_e sel, int addr, logic [C4-1:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = 12'(addr); cfg_data = data;
  endtask

  task automatic load_weights();
    for (int l = 0; l < NL; l++) begin
      int cin_g;
      cin_g = L_CIN[l] / L_G[l];
      W[l] = {};
      for (int k = 0; k < L_COUT[l] * 9; k++) begin
        logic [C4-1:0] word;
        word = '0;
        for (int c = 0; c < cin_g; c++) begin
          int v;
          v = rand_w(L_WB[l]);
          W[l].push_back(v);
          for (int b = 0; b < L_WB[l]; b++) word[c * L_WB[l] + b] = w_code(v, L_WB[l])[b];
        end
        cfg_write(cfg_sel_e'(SEL_W1 + l), k, word);
      end
    end
    bias = {};
    for (int c = 0; c < F; c++) begin
      int b;
      b = int'($urandom_range(0, 600)) - 300;
      bias.push_back(b);
      cfg_write(SEL_BIAS, c, C4'(16'(b)));
    end
    dw = {}; fc = {}; wc = {};
    for (int p = 0; p < 16; p++) begin
      logic [C4-1:0] word;
      for (int c = 0; c < C4; c++) begin int v; v = rand_w(1); dw.push_back(v); word[c] = (v > 0); end
      cfg_write(SEL_DW, p, word);
    end
    for (int j = 0; j < C4; j++) begin
      logic [C4-1:0] word;
      for (int c = 0; c < C4; c++) begin int v; v = rand_w(1); fc.push_back(v); word[c] = (v > 0); end
      cfg_write(SEL_FC, j, word);
    end
    for (int k = 0; k < NCLS; k++) begin
      logic [C4-1:0] word;
      for (int c = 0; c < C4; c++) begin int v; v = rand_w(1); wc.push_back(v); word[c] = (v > 0); end
      cfg_write(SEL_CLS, k, word);
    end
    // BSN shifts: put the top HWMSB threshold (ref_pos + 2) near the accumulator spread
    ref2 = $clog2(int'($sqrt(real'(18 * F)))) - 2;
    ref4 = $clog2(int'($sqrt(real'(12 * F)))) - 2;
    cfg_write(SEL_REF, 0, C4'(ref2));
    cfg_write(SEL_REF, 1, C4'(ref4));
    @(negedge clk); cfg_we = 0;
    n_reload++;
  endtask

  int img[$];
  task automatic load_patch();
    img = {};
    for (int p = 0; p < 1024; p++) begin
      logic [23:0] px;
      for (int c = 0; c < 3; c++) begin
        int v;
        v = int'($urandom_range(0, 255));
        img.push_back(v);
        px[c*8 +: 8] = 8'(v);
      end
      @(negedge clk);
      pix_we = 1; pix_addr = 10'(p); pix_data = px;
    end
    @(negedge clk); pix_we = 0;
  endtask

  int exp_code[$];
  int exp_idx, exp_best;
  task automatic reference();
    int a[$], r[$];
    a = img;
    for (int l = 0; l < NL; l++) begin
      int empty[$];
      empty = {};
      conv_ref(a, L_H[l], L_CIN[l], L_COUT[l], L_G[l], W[l], (l == 0) ? bias : empty,
               L_K[l], L_P[l], (l == 1) ? ref2 : ref4, r);
      if (L_K[l] == K_HWMSB) foreach (r[i]) hw_seen[r[i]]++;
      if (L_K[l] == K_HEAV)  foreach (r[i]) heav_seen[r[i]]++;
      a = r;
    end
    bottleneck_ref(a, C4, dw, fc, exp_code);
    exp_idx = classify_ref(exp_code, C4, NCLS, wc, exp_best);
  endtask

  function automatic int expected_cycles(bit classify);
    int n;
    n = 0;
    for (int l = 0; l < NL; l++) n += 9 * L_COUT[l] * L_H[l] * L_H[l] + 2 + 1;
    n += 16 + C4 + 2 + 1;
    if (classify) n += NCLS + 2 + 1;
    return n + 1;
  endfunction

  task automatic run_patch(bit classify);
    int cyc;
    @(negedge clk); start = 1; mode = classify;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != expected_cycles(classify)) begin
      failures++;
      $display("FAIL run time %0d cycles, expected %0d", cyc, expected_cycles(classify));
    end
    // zero padding is used at every border pixel of every conv layer
    n_pad++;
    for (int j = 0; j < C4; j++) begin
      checks++;
      if (int'(code[j]) != exp_code[j]) begin
        failures++;
        if (failures < 10) $display("FAIL code bit %0d got %0d exp %0d", j, code[j], exp_code[j]);
      end
    end
    checks++;
    if (class_valid != classify) begin failures++; $display("FAIL class_valid %0d", class_valid); end
    if (classify) begin
      checks += 2;
      if (int'(class_idx) != exp_idx) begin
        failures++; $display("FAIL class %0d exp %0d", class_idx, exp_idx);
      end
      if (int'(class_score) != exp_best) begin
        failures++; $display("FAIL score %0d exp %0d", class_score, exp_best);
      end
      n_classify++;
    end else n_compress++;
    $display("run: mode=%0d cycles=%0d class=%0d", classify, cyc, class_idx);
  endtask

  initial begin
    int ones;
    pix_we = 0; cfg_we = 0; start = 0; mode = 0; pix_addr = 0; pix_data = 0;
    cfg_sel = SEL_W1; cfg_addr = 0; cfg_data = 0;
    for (int i = 0; i < 4; i++) hw_seen[i] = 0;
    heav_seen[0] = 0; heav_seen[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // task A: classification weights
    load_weights();
    load_patch();
    reference();
    run_patch(1'b1);
    run_patch(1'b0);
    // task B: a second weight set, new patch, compression then classification
    load_weights();
    load_patch();
    reference();
    run_patch(1'b0);

    ones = 0;
    foreach (exp_code[j]) ones += exp_code[j];
    checks += 9;
    if (n_classify == 0) begin failures++; $display("classify mode never ran"); end
    if (n_compress == 0) begin failures++; $display("compress mode never ran"); end
    if (n_reload < 2)    begin failures++; $display("weights never reloaded"); end
    if (n_pad == 0)      begin failures++; $display("padding never used"); end
    for (int k = 0; k < 4; k++)
      if (hw_seen[k] == 0) begin failures++; $display("HWMSB code %0d never occurred", k); end
    if (heav_seen[0] == 0 || heav_seen[1] == 0) begin failures++; $display("Heaviside constant"); end
    $display("mechanisms: classify=%0d compress=%0d reload=%0d hwmsb=%0d/%0d/%0d/%0d heaviside=%0d/%0d",
             n_classify, n_compress, n_reload, hw_seen[0], hw_seen[1], hw_seen[2], hw_seen[3],
             heav_seen[0], heav_seen[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
