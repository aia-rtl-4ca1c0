// aia_event_unit: barrier synchronization of the accelerator cores.
//
// A core that writes the BARRIER register (offset 0x00) is not granted until
// every core selected by the MASK register (offset 0x04, default: all cores)
// is writing BARRIER too; then all of them are granted in the same cycle and
// the barrier counter (offset 0x08) increments. A stalled core therefore
// waits in its execute stage, with no polling. A core outside the mask is
// granted at once. Any other core access is granted at once; reads return
// the counter one cycle after the grant.
// Host port: `host_en`/`host_we`/`host_addr` select a register; MASK is
// writable, MASK and COUNT readable, read data one cycle later.
// Published: an event unit synchronizes the cores. How it does so (register
// map, barrier by withheld grant) is this design's choice.
module aia_event_unit
  import aia_pkg::*;
#(
  parameter int unsigned N_CORES = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  mem_req_t            core_req [N_CORES],
  output mem_rsp_t            core_rsp [N_CORES],
  input  logic                host_en,
  input  logic                host_we,
  input  logic [7:0]          host_addr,
  input  logic [31:0]         host_wdata,
  output logic [31:0]         host_rdata,
  output logic                release_o
);

  logic [N_CORES-1:0] mask, bar_req, other_req, rd_q;
  logic [31:0]        count;

  always_comb begin
    for (int c = 0; c < N_CORES; c++) begin
      bar_req[c]   = core_req[c].req && core_req[c].we && core_req[c].addr[7:0] == EV_BARRIER;
      other_req[c] = core_req[c].req && !bar_req[c];
    end
    release_o = ((bar_req | ~mask) == '1) && ((bar_req & mask) != '0);
    for (int c = 0; c < N_CORES; c++) begin
      core_rsp[c].gnt    = other_req[c] || (bar_req[c] && (release_o || !mask[c]));
      core_rsp[c].rvalid = rd_q[c];
      core_rsp[c].rdata  = count;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask       <= '1;
      count      <= '0;
      rd_q       <= '0;
      host_rdata <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) rd_q[c] <= other_req[c] && !core_req[c].we;
      if (release_o) count <= count + 32'd1;
      if (host_en && host_we && host_addr == EV_MASK) mask <= host_wdata[N_CORES-1:0];
      if (host_en && !host_we)
        host_rdata <= (host_addr == EV_MASK) ? 32'(mask) : count;
    end
  end

endmodule
