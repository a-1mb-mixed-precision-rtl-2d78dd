// classifier: binary fully connected layer from the C-bit latent code to
// NCLS class scores, followed by arg-max.
//
// Code and weights are both +-1 (bit 1 = +1), so each score is an XNOR and a
// population count: score[k] = 2*popcount(~(w[k] ^ code)) - C. The final
// bit-shift normalisation of the paper's classifier does not change the order
// of the scores and is not built. One class is scored per cycle (this
// design's choice); ties go to the lower class index. start -> done takes
// NCLS + 2 cycles; class_idx and best_score hold until the next start.
// Weight word k (written through wl_*) holds the C weights of class k.
module classifier
  import nqe_pkg::*;
#(
  parameter int unsigned C    = 256,
  parameter int unsigned NC   = NCLS,
  localparam int unsigned KW  = $clog2(NC),
  localparam int unsigned SW  = $clog2(C) + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  logic [C-1:0]         code,
  output logic [KW-1:0]        class_idx,
  output logic signed [SW-1:0] best_score,
  input  logic                 wl_we,
  input  logic [KW-1:0]        wl_addr,
  input  logic [C-1:0]         wl_data
);
  logic          run;
  logic [KW-1:0] k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; k <= '0;
    end else if (!run) begin
      if (start) begin run <= 1'b1; k <= '0; end
    end else begin
      k <= k + 1'b1;
      if (k == KW'(NC - 1)) run <= 1'b0;
    end
  end

  logic [C-1:0] w_rdata;
  nqe_sram #(.WIDTH(C), .DEPTH(NC)) u_wmem (
    .clk(clk), .we(wl_we), .waddr(wl_addr), .wdata(wl_data),
    .raddr(k), .rdata(w_rdata)
  );

  logic          v1, last1;
  logic [KW-1:0] k1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last1 <= 1'b0; k1 <= '0;
    end else begin
      v1    <= run;
      last1 <= run && (k == KW'(NC - 1));
      k1    <= k;
    end
  end

  logic signed [SW-1:0] score;
  always_comb begin
    logic [SW-1:0] pc;
    pc = '0;
    for (int c = 0; c < C; c++) pc += (w_rdata[c] == code[c]) ? SW'(1) : SW'(0);
    score = $signed(pc <<< 1) - $signed(SW'(C));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_idx <= '0; best_score <= '0; done <= 1'b0;
    end else begin
      done <= v1 && last1;
      if (v1 && (k1 == '0 || score > best_score)) begin
        best_score <= score;
        class_idx  <= k1;
      end
    end
  end

  assign busy = run | v1;
endmodule
