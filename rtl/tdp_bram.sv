// tdp_bram -- true dual-port block RAM, one port for the processor side and
// one for the fabric side.
//
// Port A is the processor's way in (in the FPGA it is driven by the DMA
// engine that copies data between the board DRAM and the BRAM); port B belongs
// to the memory manager. The memory is used as two halves: while the fabric
// works through one half, the processor rewrites (or reads out) the other.
// That split is a convention of the users of this memory; the RAM itself is a
// plain array of DEPTH words.
//
// Timing: both ports are synchronous to clk. A read returns the addressed
// word on the clock edge after en is sampled (read-first: a write and a read
// of the same port and address return the old word). If both ports write the
// same address in the same cycle, port A wins.
//
// The published design only states that a BRAM of "the order of Mbits" is
// split in two halves and reached from both sides. The default of 32768 x 32
// bits (1 Mbit) per memory, the single clock and the word-wide writes are
// this design's choices; two such memories fit the 4.9 Mbit of block RAM of
// the Zynq-7020 the architecture was built on.
module tdp_bram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A: processor / DMA side
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: fabric side (memory manager)
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

endmodule
