// aia_sram: dual-port synchronous word memory.
//
// Stands for the SRAM macros of the design: the 8 KB instruction memory and
// the 32 KB data scratchpad of each accelerator core, and each 8 KB bank of
// the global buffer. Both ports can read or write one 32-bit word per cycle;
// a read returns the word on the next cycle and the output holds its value
// while the port is idle, so a stalled pipeline can keep using it.
// A write on both ports to the same word in one cycle leaves port B's data.
// The sizes come from the published memory sizes; the two-port organisation
// and synchronous-read timing are this design's choice.
module aia_sram #(
  parameter int unsigned WORDS = 2048,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  // port A
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  // port B
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

endmodule
