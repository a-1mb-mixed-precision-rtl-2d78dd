// bottleneck: the encoder's replacement for the large dense bottleneck layer.
//
// Input: the 4x4xC binary (Heaviside) map of the last conv block, C = 4F.
// 1) depthwise 4x4 convolution with binary (+-1) weights: every channel c is
//    reduced over its 16 positions to d[c] = sum_p (w[p][c] ? +h : -h);
// 2) binary C x C fully connected layer on the integer vector d, with no
//    activation in between: s[j] = sum_c (v[j][c] ? +d[c] : -d[c]);
// 3) Sign: code[j] = (s[j] >= 0). The bit-shift normalisation in front of the
//    sign only rescales and is not built.
// code is the C-bit latent binary representation of the patch (0.25 bit per
// pixel for a 32x32 patch at C = 256).
//
// The two-step structure and the binary weights follow the paper. The
// schedule is this design's own: one spatial position per cycle for the
// depthwise part (all channels in parallel, 16 cycles), one FC output per cycle
// (all C inputs through an adder tree, C cycles). start -> done takes
// 16 + C + 2 cycles.
//
// Weight words: dw word p (p = 4*row + col) holds bit c = weight of channel c;
// fc word j holds bit c = weight from input c to output j (1 = +1, 0 = -1).
module bottleneck
  import nqe_pkg::*;
#(
  parameter int unsigned C = 256,
  localparam int unsigned CAW = $clog2(C),
  localparam int unsigned SUM_W = $clog2(C * 16) + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [3:0]    in_raddr,
  input  logic [C-1:0]  in_rdata,
  output logic [C-1:0]  code,
  input  logic          dw_we,
  input  logic [3:0]    dw_addr,
  input  logic [C-1:0]  dw_data,
  input  logic          fc_we,
  input  logic [CAW-1:0] fc_addr,
  input  logic [C-1:0]  fc_data
);
  typedef enum logic [1:0] {B_IDLE, B_DW, B_FC} bstate_e;
  bstate_e state;
  logic [CAW-1:0] cnt;

  // stage 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE;
      cnt   <= '0;
    end else begin
      case (state)
        B_IDLE: if (start) begin state <= B_DW; cnt <= '0; end
        B_DW: begin
          cnt <= (cnt[3:0] == 4'd15) ? '0 : cnt + 1'b1;
          if (cnt[3:0] == 4'd15) state <= B_FC;
        end
        B_FC: begin
          cnt <= cnt + 1'b1;
          if (cnt == CAW'(C - 1)) state <= B_IDLE;
        end
        default: state <= B_IDLE;
      endcase
    end
  end

  assign in_raddr = cnt[3:0];

  logic [C-1:0] dw_rdata, fc_rdata;
  nqe_sram #(.WIDTH(C), .DEPTH(16)) u_dwmem (
    .clk(clk), .we(dw_we), .waddr(dw_addr), .wdata(dw_data),
    .raddr(cnt[3:0]), .rdata(dw_rdata)
  );
  nqe_sram #(.WIDTH(C), .DEPTH(C)) u_fcmem (
    .clk(clk), .we(fc_we), .waddr(fc_addr), .wdata(fc_data),
    .raddr(cnt), .rdata(fc_rdata)
  );

  // stage 1
  logic           dw1, fc1, first1, last1;
  logic [CAW-1:0] j1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dw1 <= 1'b0; fc1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; j1 <= '0;
    end else begin
      dw1    <= (state == B_DW);
      fc1    <= (state == B_FC);
      first1 <= (state == B_DW) && (cnt[3:0] == 4'd0);
      last1  <= (state == B_FC) && (cnt == CAW'(C - 1));
      j1     <= cnt;
    end
  end

  logic signed [5:0] d [C];       // depthwise results, -16..16
  always_ff @(posedge clk) begin
    if (dw1) begin
      for (int c = 0; c < C; c++) begin
        logic signed [5:0] base;
        base = first1 ? 6'sd0 : d[c];
        if (in_rdata[c]) d[c] <= dw_rdata[c] ? base + 6'sd1 : base - 6'sd1;
        else             d[c] <= base;
      end
    end
  end

  logic signed [SUM_W-1:0] s;
  always_comb begin
    s = '0;
    for (int c = 0; c < C; c++)
      s += fc_rdata[c] ? SUM_W'(d[c]) : -SUM_W'(d[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) code <= '0;
    else if (fc1) code[j1] <= (s >= 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= last1;
  end

  assign busy = (state != B_IDLE) || dw1 || fc1;
endmodule
