// sram_1r1w: on-chip SRAM with one write port and one synchronous read port.
//
// Used three times in the accelerator: the reference-point SRAM (one
// {y, x} pair per query), the W'' SRAM (D/PD row groups of D*PD bytes) and
// the output SRAM (one D-byte row per query, addressed by query id).  A
// write and a read in the same cycle to the same word return the old word.
// rdata is valid the cycle after re.  The three memories and their contents
// are the paper's; the port arrangement and read latency are this design's
// choices (the memory is written as an array, to be mapped to a macro).
module sram_1r1w #(
  parameter int unsigned DEPTH = 20097,
  parameter int unsigned WIDTH = 24
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
