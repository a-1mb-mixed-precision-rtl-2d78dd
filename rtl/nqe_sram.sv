// nqe_sram: synchronous single-read, single-write memory.
//
// Used for every weight memory and every activation buffer of the encoder.
// A write takes effect at the clock edge; the read data for raddr appears one
// cycle after the address (registered output, like a compiled SRAM). A read
// and a write of the same address in one cycle return the old word. Written
// as an array; a foundry macro would replace it in silicon. The contents are
// not reset.
module nqe_sram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
