// aia_global_buffer: 128 KB tightly-coupled global buffer.
//
// N_BANKS independent single-ported banks of BANK_WORDS 32-bit words
// (16 x 8 KB as published). Each bank takes one access per cycle from the
// TCDM interconnect; read data appear on the next cycle and hold until the
// bank's next read. The banks are SRAM macros in silicon and arrays here.
module aia_global_buffer #(
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048,
  localparam int unsigned RAW       = $clog2(BANK_WORDS)
) (
  input  logic                          clk,
  input  logic [N_BANKS-1:0]            en,
  input  logic [N_BANKS-1:0]            we,
  input  logic [N_BANKS-1:0][RAW-1:0]   addr,
  input  logic [N_BANKS-1:0][31:0]      wdata,
  output logic [N_BANKS-1:0][31:0]      rdata
);

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [31:0] unused_rdata;
    aia_sram #(.WORDS(BANK_WORDS)) u_bank (
      .clk,
      .a_en(en[b]), .a_we(we[b]), .a_addr(addr[b]), .a_wdata(wdata[b]),
      .a_rdata(rdata[b]),
      .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata(unused_rdata)
    );
  end

endmodule
