// qconv_harness: drives one qconv_layer configuration through a full layer
// run and checks every output code and the run time against nqe_ref_pkg.
// It models the previous layer's buffer (one-cycle read latency), loads
// random weights (and biases) through the layer's load ports, pulses start,
// waits for done and reads the whole output buffer back.
module qconv_harness
  import nqe_pkg::*;
  import nqe_ref_pkg::*;
#(
  parameter int unsigned H        = 8,
  parameter int unsigned CIN      = 4,
  parameter int unsigned COUT     = 4,
  parameter int unsigned G        = 1,
  parameter int unsigned WBITS    = 3,
  parameter act_kind_e   AKIND    = ACT_SIGN,
  parameter out_kind_e   OKIND    = OUT_SIGN,
  parameter bit          POOL     = 1'b0,
  parameter bit          HAS_BIAS = 1'b0,
  parameter int          REFP     = 2,
  parameter int          RUNS     = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   fin,
  output int   codes_seen [4]
);
  localparam int AB = abits(AKIND), OB = obits(OKIND);
  localparam int CIN_G = CIN / G;
  localparam int HO = POOL ? H / 2 : H;
  localparam int IAW = $clog2(H * H);
  localparam int OAW = (HO * HO > 1) ? $clog2(HO * HO) : 1;
  localparam int WAW = $clog2(COUT * 9);
  localparam int CW  = (COUT > 1) ? $clog2(COUT) : 1;

  logic start, busy, done;
  logic [IAW-1:0] in_raddr;
  logic [CIN*AB-1:0] in_rdata;
  logic [CIN*AB-1:0] inmem [H*H];
  logic [OAW-1:0] out_raddr;
  logic [COUT*OB-1:0] out_rdata;
  logic wl_we, bias_we;
  logic [WAW-1:0] wl_addr;
  logic [CIN_G*WBITS-1:0] wl_data;
  logic [CW-1:0] bias_addr;
  logic [BIAS_W-1:0] bias_data;

  always_ff @(posedge clk) in_rdata <= inmem[in_raddr];

  qconv_layer #(.H(H), .CIN(CIN), .COUT(COUT), .G(G), .WBITS(WBITS), .AKIND(AKIND),
                .OKIND(OKIND), .POOL(POOL), .HAS_BIAS(HAS_BIAS)) dut (
    .clk, .rst_n, .start, .busy, .done, .ref_pos(4'(REFP)),
    .in_raddr, .in_rdata, .out_raddr, .out_rdata,
    .wl_we, .wl_addr, .wl_data, .bias_we, .bias_addr, .bias_data
  );

  function automatic int rand_act();
    case (AKIND)
      ACT_PIX8:  return int'($urandom_range(0, 255));
      ACT_SIGN:  return rand_w(1);
      ACT_CODE2: return int'($urandom_range(0, 3));
      default:   return int'($urandom_range(0, 1));
    endcase
  endfunction

  initial begin
    int act[$], w[$], bias[$], res[$];
    int cyc, exp_cyc;
    checks = 0; failures = 0; fin = 0;
    for (int i = 0; i < 4; i++) codes_seen[i] = 0;
    start = 0; wl_we = 0; bias_we = 0; wl_addr = '0; wl_data = '0;
    bias_addr = '0; bias_data = '0; out_raddr = '0;
    @(posedge rst_n);
    for (int run = 0; run < RUNS; run++) begin
      act = {}; w = {}; bias = {};
      for (int p = 0; p < H * H; p++) begin
        logic [CIN*AB-1:0] word;
        for (int c = 0; c < CIN; c++) begin
          int v;
          v = rand_act();
          act.push_back(v);
          word[c*AB +: AB] = AB'(a_code(v, AKIND == ACT_SIGN));
        end
        inmem[p] = word;
      end
      // weights: bias the draw on the second run so the activations saturate
      for (int k = 0; k < COUT * 9; k++) begin
        logic [CIN_G*WBITS-1:0] word;
        for (int c = 0; c < CIN_G; c++) begin
          int v;
          v = rand_w(WBITS);
          if (run == 1 && $urandom_range(0, 2) == 0) v = (WBITS == 3) ? 2 : 1;
          w.push_back(v);
          word[c*WBITS +: WBITS] = WBITS'(w_code(v, WBITS));
        end
        @(negedge clk);
        wl_we = 1; wl_addr = WAW'(k); wl_data = word;
      end
      @(negedge clk); wl_we = 0;
      if (HAS_BIAS) begin
        for (int c = 0; c < COUT; c++) begin
          int b;
          b = int'($urandom_range(0, 400)) - 200;
          bias.push_back(b);
          @(negedge clk);
          bias_we = 1; bias_addr = CW'(c); bias_data = BIAS_W'(b);
        end
        @(negedge clk); bias_we = 0;
      end
      conv_ref(act, H, CIN, COUT, G, w, bias,
               (OKIND == OUT_HWMSB) ? K_HWMSB : (OKIND == OUT_HEAV) ? K_HEAV : K_SIGN,
               POOL, REFP, res);
      // run the layer
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      exp_cyc = H * H * COUT * 9 + 2;
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("FAIL run time %0d cycles, expected %0d", cyc, exp_cyc);
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
      // read back
      for (int p = 0; p < HO * HO; p++) begin
        out_raddr = OAW'(p);
        @(negedge clk);
        for (int c = 0; c < COUT; c++) begin
          int got, exp;
          got = int'(out_rdata[c*OB +: OB]);
          exp = res[p * COUT + c];
          if (OKIND == OUT_SIGN) exp = (exp > 0) ? 1 : 0;
          codes_seen[got]++;
          checks++;
          if (got != exp) begin
            failures++;
            if (failures < 8) $display("FAIL H=%0d CIN=%0d pos %0d ch %0d got %0d exp %0d",
                                       H, CIN, p, c, got, exp);
          end
        end
      end
    end
    fin = 1;
  end
endmodule
