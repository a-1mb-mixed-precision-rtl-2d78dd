// tb_nqe_sram: writes random words, reads them back with the one-cycle read
// latency, and checks read-during-write returns the old word.
module tb_nqe_sram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [5:0] waddr, raddr;
  logic [19:0] wdata, rdata;
  logic [19:0] model [64];

  nqe_sram #(.WIDTH(20), .DEPTH(64)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = 20'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); raddr = 6'(63 - i);
      @(negedge clk);
      checks++;
      if (rdata !== model[63 - i]) begin failures++; $display("FAIL rd %0d", 63 - i); end
    end
    // read and write the same address in one cycle: old data is returned
    for (int i = 0; i < 32; i++) begin
      int a;
      a = int'($urandom_range(0, 63));
      @(negedge clk);
      we = 1; waddr = 6'(a); raddr = 6'(a); wdata = 20'($urandom);
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL rdw %0d", a); end
      model[a] = wdata;
      raddr = 6'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL new %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
