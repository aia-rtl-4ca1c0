// aia_top: accelerator side of the AIA SoC.
//
// The 4x4 accelerator mesh (aia_mesh) runs on `mesh_clk`; the host side of
// the SoC (host core, SoC interconnect, memories, peripherals, not part of
// this RTL) reaches it from `soc_clk` through two asynchronous FIFOs: one
// for requests (write-enable, address, data), one for read data.
// SoC side: offer a request with `host_req_valid`; it is taken in a cycle
// with `host_req_ready` high. Every read returns one `host_rsp_valid` pulse
// with `host_rsp_rdata`, in order; writes return nothing. See
// aia_mesh_interco for the address map. The DMA master port of the global
// buffer interconnect is brought out in the mesh clock domain; `core_done`
// shows which cores have halted (mesh clock domain).
module aia_top
  import aia_pkg::*;
#(
  parameter int unsigned N_CORES = 16
) (
  input  logic               soc_clk,
  input  logic               soc_rst_n,
  input  logic               mesh_clk,
  input  logic               mesh_rst_n,
  // host bus, SoC clock domain
  input  logic               host_req_valid,
  output logic               host_req_ready,
  input  host_req_t          host_req,
  output logic               host_rsp_valid,
  output logic [31:0]        host_rsp_rdata,
  // DMA port to the global buffer, mesh clock domain
  input  mem_req_t           dma_req,
  output mem_rsp_t           dma_rsp,
  output logic [N_CORES-1:0] core_done
);

  localparam int unsigned REQ_W = $bits(host_req_t);

  logic            req_full, req_empty, req_pop;
  logic [REQ_W-1:0] req_rdata;
  logic            rsp_full, rsp_empty, rsp_push;
  logic [31:0]     rsp_wdata;

  assign host_req_ready = !req_full;

  aia_cdc_fifo #(.WIDTH(REQ_W), .DEPTH(4)) u_req_fifo (
    .wclk(soc_clk), .wrst_n(soc_rst_n), .wr(host_req_valid), .wdata(host_req),
    .full(req_full),
    .rclk(mesh_clk), .rrst_n(mesh_rst_n), .rd(req_pop), .rdata(req_rdata),
    .empty(req_empty)
  );

  aia_cdc_fifo #(.WIDTH(32), .DEPTH(4)) u_rsp_fifo (
    .wclk(mesh_clk), .wrst_n(mesh_rst_n), .wr(rsp_push), .wdata(rsp_wdata),
    .full(rsp_full),
    .rclk(soc_clk), .rrst_n(soc_rst_n), .rd(!rsp_empty), .rdata(host_rsp_rdata),
    .empty(rsp_empty)
  );
  assign host_rsp_valid = !rsp_empty;

  aia_mesh #(.ROWS(4), .COLS(N_CORES / 4)) u_mesh (
    .clk(mesh_clk), .rst_n(mesh_rst_n),
    .in_valid(!req_empty), .in_req(host_req_t'(req_rdata)), .in_pop(req_pop),
    .out_push(rsp_push), .out_rdata(rsp_wdata), .out_full(rsp_full),
    .dma_req, .dma_rsp, .core_done
  );

endmodule
