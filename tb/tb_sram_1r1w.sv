// tb_sram_1r1w: random writes and reads against an associative-array model,
// including read-during-write to the same word (old data expected) and the
// one-cycle read latency; rdata must hold while no read is issued.
module tb_sram_1r1w;
  localparam int DEPTH = 300, WIDTH = 40;
  logic clk = 0, we = 0, re = 0;
  always #5 clk = ~clk;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata, expq;
  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  logic [WIDTH-1:0] model [int];
  int checks = 0, failures = 0;
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = $bits(waddr)'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom % 2; re = $urandom % 2;
      waddr = $bits(waddr)'($urandom % DEPTH);
      raddr = (t % 7 == 0) ? waddr : $bits(raddr)'($urandom % DEPTH);
      wdata = {$urandom, $urandom};
      expq = re ? model[int'(raddr)] : rdata;
      @(posedge clk); #1;
      if (we) model[int'(waddr)] = wdata;
      checks++;
      if (rdata !== expq) begin failures++; if (failures < 5) $display("t%0d addr %0d", t, raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
