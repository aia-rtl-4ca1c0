// aia_cdc_fifo: asynchronous FIFO between the SoC and mesh clock domains.
//
// The mesh runs in its own clock domain; host requests enter it, and read
// data leave it, through one of these FIFOs each. Write and read pointers
// are kept in Gray code and passed to the other domain through two-flop
// synchronizers, so `full` and `empty` are conservative. The read side is
// show-ahead: `rdata` is the oldest entry whenever `empty` is low, and `rd`
// removes it. DEPTH must be a power of two.
// Published: the two FIFOs at the clock-domain boundary. Depth (the figure
// draws three slots; 4 is used) and the Gray-pointer scheme are this
// design's choice.
module aia_cdc_fifo #(
  parameter int unsigned WIDTH = 65,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_s1, wgray_s2, rgray_s1, rgray_s2;
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign wbin_n = wbin + (AW+1)'(wr && !full);
  assign full   = (wgray == {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_s1 <= '0;
      rgray_s2 <= '0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= bin2gray(wbin_n);
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
    end
  end

  always_ff @(posedge wclk) if (wr && !full) mem[wbin[AW-1:0]] <= wdata;

  // read domain
  assign rbin_n = rbin + (AW+1)'(rd && !empty);
  assign empty  = (rgray == wgray_s2);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_s1 <= '0;
      wgray_s2 <= '0;
    end else begin
      rbin     <= rbin_n;
      rgray    <= bin2gray(rbin_n);
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
    end
  end

endmodule
