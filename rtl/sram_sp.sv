// sram_sp: single-port synchronous SRAM, one read or one write per cycle.
//
// A write (en & we) stores wdata under the byte-enable mask be.  A read
// (en & ~we) returns the word on rdata one cycle later; rdata then holds that
// value until the next read, which lets the controller keep a read result
// while it waits on the bus.  The array has no reset, like a real macro.
// The paper places the partial sums in on-chip SRAM behind the memory
// controller but does not size it; depth and width here are this design's.
module sram_sp #(
  parameter int unsigned WORDS  = 8388608,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned ADDR_W = $clog2(WORDS),
  localparam int unsigned BE_W   = DATA_W / 8
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [BE_W-1:0]   be,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < BE_W; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
