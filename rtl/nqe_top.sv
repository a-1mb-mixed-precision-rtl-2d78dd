// nqe_top: Nonlinear Quantized Encoder (NQE) with its binary classifier.
//
// The encoder turns one 32x32 RGB patch (8-bit pixels) into a 4F-bit latent
// code: six 3x3 convolution layers in three blocks, a depthwise 4x4 + FC
// bottleneck, and Sign. Layer list (paper's topology, F = 64 by default):
//   L1  32x32x3   -> F   quinary weights, channel bias, Sign
//   L2  32x32xF   -> F   quinary, HWMSB (BSN shift ref2), 2x2 max pool
//   L3  16x16xF   -> 2F  ternary, Sign
//   L4  16x16x2F  -> 2F  ternary, HWMSB (BSN shift ref4), 2x2 max pool
//   L5  8x8x2F    -> 4F  binary, Sign
//   L6  8x8x4F    -> 4F  binary group conv (4 groups, channel shuffle),
//                        Heaviside, 2x2 max pool
//   BN  4x4x4F    -> 4F  depthwise 4x4 + 4F x 4F FC, Sign -> code
//   CLS 4F        -> 10  binary FC, arg-max -> class_idx (classify mode)
// With F = 64 the weight memories hold 1,072,704 bits.
//
// Operation (this design's own host interface and sequencing): the host
// loads weights, the layer-1 biases and the two BSN shifts through the cfg_*
// bus (select cfg_sel, address cfg_addr, data cfg_data; the word layouts are
// those of the layer modules), writes the 1024 pixels of a patch through
// pix_* (pixel y*32+x, R/G/B in bits 7:0/15:8/23:16), then pulses start.
// The layers run one after another, each reading the previous one's output
// buffer. mode = 0 (compress) stops after the bottleneck, mode = 1 (classify)
// also runs the classifier. done pulses once with code (and class_idx) valid;
// they hold until the next run. Loading a different weight set between runs
// switches the task, which is how the paper reuses the encoder for both
// classification and compression. Each stage costs its latency plus one
// hand-over cycle: 9*COUT*H*H + 3 per conv layer, 4F + 19 for the bottleneck
// and 13 for the classifier. With the start cycle a run takes 2,064,691 cycles
// in classify mode and 2,064,678 in compress mode at F = 64.
module nqe_top
  import nqe_pkg::*;
#(
  parameter int unsigned F = 64,
  localparam int unsigned C4    = 4 * F,
  localparam int unsigned CFG_W = 4 * F,
  localparam int unsigned KW    = $clog2(NCLS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // patch input
  input  logic             pix_we,
  input  logic [9:0]       pix_addr,
  input  logic [23:0]      pix_data,
  // weight / parameter load
  input  logic             cfg_we,
  input  cfg_sel_e         cfg_sel,
  input  logic [11:0]      cfg_addr,
  input  logic [CFG_W-1:0] cfg_data,
  // control
  input  logic             start,
  input  logic             mode,        // 0 compress, 1 classify
  output logic             busy,
  output logic             done,
  // results
  output logic [C4-1:0]    code,
  output logic             class_valid,
  output logic [KW-1:0]    class_idx,
  output logic signed [$clog2(4*F)+1:0] class_score
);
  // ---------------- input patch buffer ----------------
  logic [9:0]  l1_in_raddr;
  logic [23:0] l1_in_rdata;
  nqe_sram #(.WIDTH(24), .DEPTH(IMG * IMG)) u_inbuf (
    .clk(clk), .we(pix_we), .waddr(pix_addr), .wdata(pix_data),
    .raddr(l1_in_raddr), .rdata(l1_in_rdata)
  );

  // ---------------- BSN shifts of the HWMSB layers ----------------
  logic [REF_W-1:0] ref2, ref4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref2 <= REF_W'(6); ref4 <= REF_W'(6);
    end else if (cfg_we && cfg_sel == SEL_REF) begin
      if (cfg_addr[0]) ref4 <= cfg_data[REF_W-1:0];
      else             ref2 <= cfg_data[REF_W-1:0];
    end
  end

  // ---------------- sequencer ----------------
  typedef enum logic [3:0] {
    T_IDLE, T_L1, T_L2, T_L3, T_L4, T_L5, T_L6, T_BN, T_CLS
  } tstate_e;
  tstate_e state;
  logic    kick;      // one-cycle start for the stage entered last cycle
  logic    mode_q;
  logic [8:0] st_done; // done of each stage, indexed like tstate_e

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; kick <= 1'b0; mode_q <= 1'b0; done <= 1'b0;
      class_valid <= 1'b0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      case (state)
        T_IDLE: if (start) begin
          state <= T_L1; kick <= 1'b1; mode_q <= mode; class_valid <= 1'b0;
        end
        T_BN: if (st_done[T_BN]) begin
          if (mode_q) begin state <= T_CLS; kick <= 1'b1; end
          else begin state <= T_IDLE; done <= 1'b1; end
        end
        T_CLS: if (st_done[T_CLS]) begin
          state <= T_IDLE; done <= 1'b1; class_valid <= 1'b1;
        end
        default: if (st_done[state]) begin
          state <= tstate_e'(state + 1'b1); kick <= 1'b1;
        end
      endcase
    end
  end

  assign busy = (state != T_IDLE);

  logic [8:1] st_start;  // start of each stage, indexed like tstate_e
  always_comb begin
    st_start = '0;
    if (state != T_IDLE) st_start[state] = kick;
  end

  function automatic logic wsel(cfg_sel_e s, logic we, cfg_sel_e sel);
    return we && (sel == s);
  endfunction

  // ---------------- convolution layers ----------------
  localparam int unsigned WW1 = 3 * 3, WW2 = F * 3, WW3 = F * 2,
                          WW4 = 2 * F * 2, WW5 = 2 * F, WW6 = F;

  logic [9:0]       l2_in_raddr;
  logic [F-1:0]     l1_out;
  logic [7:0]       l3_in_raddr;
  logic [2*F-1:0]   l2_out;
  logic [7:0]       l4_in_raddr;
  logic [2*F-1:0]   l3_out;
  logic [5:0]       l5_in_raddr;
  logic [4*F-1:0]   l4_out;
  logic [5:0]       l6_in_raddr;
  logic [4*F-1:0]   l5_out;
  logic [3:0]       bn_in_raddr;
  logic [4*F-1:0]   l6_out;
  logic [8:0]       unused_busy;

  qconv_layer #(.H(32), .CIN(3), .COUT(F), .G(1), .WBITS(3), .AKIND(ACT_PIX8),
                .OKIND(OUT_SIGN), .POOL(1'b0), .HAS_BIAS(1'b1)) u_l1 (
    .clk, .rst_n, .start(st_start[T_L1]), .busy(unused_busy[1]), .done(st_done[T_L1]),
    .ref_pos(ref2),
    .in_raddr(l1_in_raddr), .in_rdata(l1_in_rdata),
    .out_raddr(l2_in_raddr), .out_rdata(l1_out),
    .wl_we(wsel(SEL_W1, cfg_we, cfg_sel)), .wl_addr(cfg_addr[$clog2(F*9)-1:0]),
    .wl_data(cfg_data[WW1-1:0]),
    .bias_we(wsel(SEL_BIAS, cfg_we, cfg_sel)), .bias_addr(cfg_addr[$clog2(F)-1:0]),
    .bias_data(cfg_data[BIAS_W-1:0])
  );

  qconv_layer #(.H(32), .CIN(F), .COUT(F), .G(1), .WBITS(3), .AKIND(ACT_SIGN),
                .OKIND(OUT_HWMSB), .POOL(1'b1), .HAS_BIAS(1'b0)) u_l2 (
    .clk, .rst_n, .start(st_start[T_L2]), .busy(unused_busy[2]), .done(st_done[T_L2]),
    .ref_pos(ref2),
    .in_raddr(l2_in_raddr), .in_rdata(l1_out),
    .out_raddr(l3_in_raddr), .out_rdata(l2_out),
    .wl_we(wsel(SEL_W2, cfg_we, cfg_sel)), .wl_addr(cfg_addr[$clog2(F*9)-1:0]),
    .wl_data(cfg_data[WW2-1:0]),
    .bias_we(1'b0), .bias_addr('0), .bias_data('0)
  );

  qconv_layer #(.H(16), .CIN(F), .COUT(2*F), .G(1), .WBITS(2), .AKIND(ACT_CODE2),
                .OKIND(OUT_SIGN), .POOL(1'b0), .HAS_BIAS(1'b0)) u_l3 (
    .clk, .rst_n, .start(st_start[T_L3]), .busy(unused_busy[3]), .done(st_done[T_L3]),
    .ref_pos(ref4),
    .in_raddr(l3_in_raddr), .in_rdata(l2_out),
    .out_raddr(l4_in_raddr), .out_rdata(l3_out),
    .wl_we(wsel(SEL_W3, cfg_we, cfg_sel)), .wl_addr(cfg_addr[$clog2(2*F*9)-1:0]),
    .wl_data(cfg_data[WW3-1:0]),
    .bias_we(1'b0), .bias_addr('0), .bias_data('0)
  );

  qconv_layer #(.H(16), .CIN(2*F), .COUT(2*F), .G(1), .WBITS(2), .AKIND(ACT_SIGN),
                .OKIND(OUT_HWMSB), .POOL(1'b1), .HAS_BIAS(1'b0)) u_l4 (
    .clk, .rst_n, .start(st_start[T_L4]), .busy(unused_busy[4]), .done(st_done[T_L4]),
    .ref_pos(ref4),
    .in_raddr(l4_in_raddr), .in_rdata(l3_out),
    .out_raddr(l5_in_raddr), .out_rdata(l4_out),
    .wl_we(wsel(SEL_W4, cfg_we, cfg_sel)), .wl_addr(cfg_addr[$clog2(2*F*9)-1:0]),
    .wl_data(cfg_data[WW4-1:0]),
    .bias_we(1'b0), .bias_addr('0), .bias_data('0)
  );

  qconv_layer #(.H(8), .CIN(2*F), .COUT(4*F), .G(1), .WBITS(1), .AKIND(ACT_CODE2),
                .OKIND(OUT_SIGN), .POOL(1'b0), .HAS_BIAS(1'b0)) u_l5 (
    .clk, .rst_n, .start(st_start[T_L5]), .busy(unused_busy[5]), .done(st_done[T_L5]),
    .ref_pos(ref4),
    .in_raddr(l5_in_raddr), .in_rdata(l4_out),
    .out_raddr(l6_in_raddr), .out_rdata(l5_out),
    .wl_we(wsel(SEL_W5, cfg_we, cfg_sel)), .wl_addr(cfg_addr[$clog2(4*F*9)-1:0]),
    .wl_data(cfg_data[WW5-1:0]),
    .bias_we(1'b0), .bias_addr('0), .bias_data('0)
  );

  qconv_layer #(.H(8), .CIN(4*F), .COUT(4*F), .G(4), .WBITS(1), .AKIND(ACT_SIGN),
                .OKIND(OUT_HEAV), .POOL(1'b1), .HAS_BIAS(1'b0)) u_l6 (
    .clk, .rst_n, .start(st_start[T_L6]), .busy(unused_busy[6]), .done(st_done[T_L6]),
    .ref_pos(ref4),
    .in_raddr(l6_in_raddr), .in_rdata(l5_out),
    .out_raddr(bn_in_raddr), .out_rdata(l6_out),
    .wl_we(wsel(SEL_W6, cfg_we, cfg_sel)), .wl_addr(cfg_addr[$clog2(4*F*9)-1:0]),
    .wl_data(cfg_data[WW6-1:0]),
    .bias_we(1'b0), .bias_addr('0), .bias_data('0)
  );

  // ---------------- bottleneck and classifier ----------------
  bottleneck #(.C(C4)) u_bn (
    .clk, .rst_n, .start(st_start[T_BN]), .busy(unused_busy[7]), .done(st_done[T_BN]),
    .in_raddr(bn_in_raddr), .in_rdata(l6_out), .code(code),
    .dw_we(wsel(SEL_DW, cfg_we, cfg_sel)), .dw_addr(cfg_addr[3:0]), .dw_data(cfg_data[C4-1:0]),
    .fc_we(wsel(SEL_FC, cfg_we, cfg_sel)), .fc_addr(cfg_addr[$clog2(C4)-1:0]),
    .fc_data(cfg_data[C4-1:0])
  );

  classifier #(.C(C4), .NC(NCLS)) u_cls (
    .clk, .rst_n, .start(st_start[T_CLS]), .busy(unused_busy[8]), .done(st_done[T_CLS]),
    .code(code), .class_idx(class_idx), .best_score(class_score),
    .wl_we(wsel(SEL_CLS, cfg_we, cfg_sel)), .wl_addr(cfg_addr[KW-1:0]),
    .wl_data(cfg_data[C4-1:0])
  );

  assign st_done[T_IDLE]  = 1'b0;
  assign unused_busy[0]   = 1'b0;

endmodule
