// qconv_layer: one 3x3 convolution layer of the mixed-precision encoder,
// with its weight memory, activation, optional 2x2 max pooling and its own
// output buffer.
//
// What it computes (the paper's layer definition): a 3x3 convolution with
// zero padding ("same" size) of an H x H x CIN map, weights quantised to
// WBITS (3 = quinary, 2 = ternary, 1 = binary), optional channel biases (first
// layer only), then one of Sign, HWMSB (with the bit-shift normalisation folded
// in as ref_pos) or Heaviside, then optionally a 2x2 max pooling applied to the
// quantised codes. With G > 1 the layer is a group convolution: output channel
// co of group g = co / (COUT/G) only sees the CIN/G input channels of group g,
// and its result is stored at the shuffled position (co mod COUT/G)*G + g
// (ShuffleNet channel transposition). The normalisation in front of Sign and
// Heaviside only rescales and is therefore not built.
//
// How (this design's own dataflow): one kernel tap of one output pixel per
// cycle, all CIN/G input channels of the group in parallel through a qdot adder
// tree, one output channel after the other. Loop order, outer to inner:
// output position (pooled grid when POOL), 2x2 sub-pixel (POOL only), output
// channel, tap. The pooled maximum of every channel is kept in a word register
// and written once per output position. Run time from start to done is
// H*H*COUT*9 + 2 cycles (counted from the clock edge that samples start to
// the edge after which done is high).
//
// Interface: start (pulse, ignored while busy) -> busy ... done (one-cycle
// pulse). in_raddr/in_rdata read the previous buffer (word = all channels of one
// pixel, channel c at bits [c*AB +: AB], data one cycle after the address).
// out_raddr/out_rdata read this layer's output buffer the same way.
// wl_* writes weight word co*9 + tap (tap = 3*ky + kx), lane i at bits
// [i*WBITS +: WBITS]. bias_* writes the bias of channel bias_addr.
module qconv_layer
  import nqe_pkg::*;
#(
  parameter int unsigned H        = 32,
  parameter int unsigned CIN      = 3,
  parameter int unsigned COUT     = 64,
  parameter int unsigned G        = 1,
  parameter int unsigned WBITS    = 3,
  parameter act_kind_e   AKIND    = ACT_PIX8,
  parameter out_kind_e   OKIND    = OUT_SIGN,
  parameter bit          POOL     = 1'b0,
  parameter bit          HAS_BIAS = 1'b1,
  localparam int unsigned AB     = abits(AKIND),
  localparam int unsigned OB     = obits(OKIND),
  localparam int unsigned CIN_G  = CIN / G,
  localparam int unsigned COUT_G = COUT / G,
  localparam int unsigned HO     = POOL ? H / 2 : H,
  localparam int unsigned IAW    = $clog2(H * H),
  localparam int unsigned OAW    = (HO * HO > 1) ? $clog2(HO * HO) : 1,
  localparam int unsigned WAW    = $clog2(COUT * 9),
  localparam int unsigned CW     = (COUT > 1) ? $clog2(COUT) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  input  logic [REF_W-1:0]      ref_pos,
  // previous activation buffer
  output logic [IAW-1:0]        in_raddr,
  input  logic [CIN*AB-1:0]     in_rdata,
  // this layer's output buffer, read side
  input  logic [OAW-1:0]        out_raddr,
  output logic [COUT*OB-1:0]    out_rdata,
  // weight and bias load
  input  logic                  wl_we,
  input  logic [WAW-1:0]        wl_addr,
  input  logic [CIN_G*WBITS-1:0] wl_data,
  input  logic                  bias_we,
  input  logic [CW-1:0]         bias_addr,
  input  logic [BIAS_W-1:0]     bias_data
);
  localparam int unsigned SW = POOL ? 2 : 1;

  // ---------------- stage 0: loop counters and address generation ---------
  logic            run;
  logic [5:0]      oy, ox;
  logic [SW-1:0]   sub;
  logic [CW-1:0]   co;
  logic [3:0]      tap;

  logic last_tap, last_co, last_sub, last_x, last_y;
  assign last_tap = (tap == 4'd8);
  assign last_co  = (co == CW'(COUT - 1));
  assign last_sub = POOL ? (sub == '1) : 1'b1;
  assign last_x   = (ox == 6'(HO - 1));
  assign last_y   = (oy == 6'(HO - 1));

  logic [6:0] py, px;               // pixel of the pre-pooling grid
  logic signed [7:0] iy, ix;        // input pixel of this tap
  logic [1:0] ky, kx;
  logic inb;

  always_comb begin
    ky = (tap >= 4'd6) ? 2'd2 : (tap >= 4'd3) ? 2'd1 : 2'd0;
    kx = 2'(tap - 4'(ky) * 4'd3);
    if (POOL) begin
      py = {oy, sub[SW-1]};
      px = {ox, sub[0]};
    end else begin
      py = {1'b0, oy};
      px = {1'b0, ox};
    end
    iy  = $signed({1'b0, py}) + $signed({6'd0, ky}) - 8'sd1;
    ix  = $signed({1'b0, px}) + $signed({6'd0, kx}) - 8'sd1;
    inb = (iy >= 0) && (iy < $signed(8'(H))) && (ix >= 0) && (ix < $signed(8'(H)));
  end

  assign in_raddr = inb ? IAW'(32'(iy) * H + 32'(ix)) : '0;

  logic [WAW-1:0] w_raddr;
  assign w_raddr = WAW'(32'(co) * 9 + 32'(tap));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      oy <= '0; ox <= '0; sub <= '0; co <= '0; tap <= '0;
    end else if (!run) begin
      if (start) begin
        run <= 1'b1;
        oy <= '0; ox <= '0; sub <= '0; co <= '0; tap <= '0;
      end
    end else begin
      tap <= last_tap ? '0 : tap + 4'd1;
      if (last_tap) begin
        co <= last_co ? '0 : co + 1'b1;
        if (last_co) begin
          if (POOL) sub <= sub + 1'b1;
          if (last_sub) begin
            ox <= last_x ? '0 : ox + 6'd1;
            if (last_x) begin
              oy <= last_y ? '0 : oy + 6'd1;
              if (last_y) run <= 1'b0;
            end
          end
        end
      end
    end
  end

  // ---------------- stage 1: memories return data, MAC, activation --------
  logic            v1, first1, lastt1, firstsub1, wr1, fin1, inb1;
  logic [CW-1:0]   co1;
  logic [OAW-1:0]  oaddr1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; lastt1 <= 1'b0; firstsub1 <= 1'b0;
      wr1 <= 1'b0; fin1 <= 1'b0; inb1 <= 1'b0; co1 <= '0; oaddr1 <= '0;
    end else begin
      v1        <= run;
      first1    <= run && (tap == 4'd0);
      lastt1    <= run && last_tap;
      firstsub1 <= POOL ? (sub == '0) : 1'b1;
      wr1       <= run && last_tap && last_co && last_sub;
      fin1      <= run && last_tap && last_co && last_sub && last_x && last_y;
      inb1      <= inb;
      co1       <= co;
      oaddr1    <= OAW'(32'(oy) * HO + 32'(ox));
    end
  end

  logic [CIN_G*WBITS-1:0] w_rdata;

  nqe_sram #(.WIDTH(CIN_G * WBITS), .DEPTH(COUT * 9)) u_wmem (
    .clk   (clk),
    .we    (wl_we),
    .waddr (wl_addr),
    .wdata (wl_data),
    .raddr (w_raddr),
    .rdata (w_rdata)
  );

  // channel biases (first layer)
  logic signed [BIAS_W-1:0] bias_q [COUT];
  always_ff @(posedge clk) begin
    if (HAS_BIAS && bias_we) bias_q[bias_addr] <= bias_data;
  end

  // group of the current output channel and its slice of the input word
  logic [CW-1:0] grp1;
  logic [CW-1:0] oc1;         // shuffled output position
  logic [CIN_G*AB-1:0] act_slice;
  assign grp1 = CW'(32'(co1) / COUT_G);
  assign oc1  = (G > 1) ? CW'((32'(co1) % COUT_G) * G + 32'(grp1)) : co1;
  assign act_slice = in_rdata[32'(grp1) * CIN_G * AB +: CIN_G * AB];

  logic signed [ACC_W-1:0] dot, acc, acc_n, init;
  qdot #(.N(CIN_G), .WBITS(WBITS), .AKIND(AKIND), .SUM_W(ACC_W)) u_dot (
    .act (act_slice),
    .wgt (w_rdata),
    .en  (inb1),
    .sum (dot)
  );

  assign init  = HAS_BIAS ? ACC_W'(bias_q[co1]) : '0;
  assign acc_n = (first1 ? init : acc) + dot;

  logic [1:0] hw_code;
  hwmsb #(.ACC_W(ACC_W), .REF_W(REF_W)) u_hwmsb (
    .acc     (acc_n),
    .ref_pos (ref_pos),
    .code    (hw_code)
  );

  logic [1:0] code;       // only the low OB bits are stored
  always_comb begin
    case (OKIND)
      OUT_HWMSB: code = hw_code;
      OUT_HEAV:  code = {1'b0, acc_n > 0};
      default:   code = {1'b0, acc_n >= 0};
    endcase
  end

  logic [COUT*OB-1:0] oword;    // pooled codes of the current output position
  logic [OB-1:0]      old_code;
  assign old_code = oword[32'(oc1) * OB +: OB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      oword <= '0;
    end else if (v1) begin
      acc <= acc_n;
      if (lastt1) begin
        if (firstsub1 || code[OB-1:0] > old_code) oword[32'(oc1) * OB +: OB] <= code[OB-1:0];
      end
    end
  end

  // ---------------- stage 2: write the finished output position -----------
  logic            we2, fin2;
  logic [OAW-1:0]  waddr2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we2 <= 1'b0; fin2 <= 1'b0; waddr2 <= '0;
    end else begin
      we2    <= v1 && wr1;
      fin2   <= v1 && fin1;
      waddr2 <= oaddr1;
    end
  end

  nqe_sram #(.WIDTH(COUT * OB), .DEPTH(HO * HO)) u_obuf (
    .clk   (clk),
    .we    (we2),
    .waddr (waddr2),
    .wdata (oword),
    .raddr (out_raddr),
    .rdata (out_rdata)
  );

  assign done = fin2;
  assign busy = run | v1 | we2;

endmodule
