// aia_mesh: the accelerator mesh, ROWS x COLS accelerator cores.
//
// Cores are numbered row-major (core 0 top-left). Each core's four
// neighbour-read links go to the shared-register port of the adjacent core;
// a request towards the edge of the array is granted at once and reads 0.
// Data accesses leaving a core are routed by region: the global buffer
// (0x2xxx_xxxx) through the TCDM interconnect, for the top-row cores only;
// the event unit (0x3xxx_xxxx); anything else is granted at once and reads 0.
// The TCDM interconnect has COLS + 2 masters: the top-row cores, the host
// path of the mesh interconnect and the DMA port (brought out, not built).
// Host access enters through the mesh interconnect's request/response FIFO
// ports. Published: 4x4 cores, N-E-S-W register sharing, global buffer for
// the top four cores, event unit, mesh and TCDM interconnects, DMA. The
// routing of the other cores' global-buffer accesses (refused) and the
// edge behaviour are this design's choice.
module aia_mesh
  import aia_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned IMEM_WORDS = 2048,
  parameter int unsigned DMEM_WORDS = 8192,
  parameter int unsigned GB_BANKS   = 16,
  parameter int unsigned GB_WORDS   = 2048,
  localparam int unsigned N_CORES   = ROWS * COLS,
  localparam int unsigned N_TM      = COLS + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  host_req_t     in_req,
  output logic          in_pop,
  output logic          out_push,
  output logic [31:0]   out_rdata,
  input  logic          out_full,
  input  mem_req_t      dma_req,
  output mem_rsp_t      dma_rsp,
  output logic [N_CORES-1:0] core_done
);

  localparam int unsigned GB_RAW = $clog2(GB_WORDS);

  // ---------------------------------------------------------------- cores
  mem_req_t              hreq  [N_CORES];
  logic [31:0]           hrdata[N_CORES];
  mem_req_t              ext_req [N_CORES];
  mem_rsp_t              ext_rsp [N_CORES];
  logic [N_CORES-1:0]    fetch_en;
  logic [3:0]            nb_req  [N_CORES];
  logic [3:0][4:0]       nb_addr [N_CORES];
  logic [3:0]            nb_gnt  [N_CORES];
  logic [3:0][31:0]      nb_rdata[N_CORES];
  logic [3:0]            sh_req  [N_CORES];
  logic [3:0][4:0]       sh_addr [N_CORES];
  logic [3:0]            sh_gnt  [N_CORES];
  logic [31:0]           sh_rdata[N_CORES];

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    aia_ac #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_ac (
      .clk, .rst_n,
      .core_id(4'(i)),
      .fetch_en(fetch_en[i]),
      .done(core_done[i]),
      .host_req(hreq[i]), .host_rdata(hrdata[i]),
      .ext_req(ext_req[i]), .ext_rsp(ext_rsp[i]),
      .nb_req(nb_req[i]), .nb_addr(nb_addr[i]), .nb_gnt(nb_gnt[i]), .nb_rdata(nb_rdata[i]),
      .sh_req(sh_req[i]), .sh_addr(sh_addr[i]), .sh_gnt(sh_gnt[i]), .sh_rdata(sh_rdata[i])
    );
  end

  // ------------------------------------------------------ neighbour links
  // Core i's request in direction d reaches neighbour j on j's side opposite(d).
  function automatic int neighbour(input int i, input int d);
    int r, c;
    r = i / int'(COLS);
    c = i % int'(COLS);
    case (d)
      0:       return (r > 0)               ? i - int'(COLS) : -1;  // N
      1:       return (r < int'(ROWS) - 1)  ? i + int'(COLS) : -1;  // S
      2:       return (c > 0)               ? i - 1          : -1;  // W
      default: return (c < int'(COLS) - 1)  ? i + 1          : -1;  // E
    endcase
  endfunction

  for (genvar i = 0; i < N_CORES; i++) begin : g_link
    for (genvar d = 0; d < 4; d++) begin : g_dir
      localparam int J  = neighbour(i, d);
      localparam int OD = int'(opposite(dir_e'(d)));
      if (J >= 0) begin : g_in
        assign sh_req[J][OD]  = nb_req[i][d];
        assign sh_addr[J][OD] = nb_addr[i][d];
        assign nb_gnt[i][d]   = sh_gnt[J][OD];
        assign nb_rdata[i][d] = sh_rdata[J];
      end else begin : g_edge
        assign nb_gnt[i][d]   = 1'b1;
        assign nb_rdata[i][d] = '0;
        // the edge side of this core's shared port has no requester
        assign sh_req[i][d]   = 1'b0;
        assign sh_addr[i][d]  = '0;
      end
    end
  end

  // ------------------------------------------------------- data routing
  mem_req_t tm_req [N_TM];
  mem_rsp_t tm_rsp [N_TM];
  mem_req_t ev_req [N_CORES];
  mem_rsp_t ev_rsp [N_CORES];
  logic [N_CORES-1:0] err_rvalid_q;
  logic [N_CORES-1:0] to_gb, to_ev, to_err;

  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      to_gb[i]  = ext_req[i].addr[31:28] == REGION_GBUF && i < int'(COLS);
      to_ev[i]  = ext_req[i].addr[31:28] == REGION_EVENT;
      to_err[i] = !to_gb[i] && !to_ev[i];
      ev_req[i]     = ext_req[i];
      ev_req[i].req = ext_req[i].req && to_ev[i];
    end
    for (int m = 0; m < int'(COLS); m++) begin
      tm_req[m]     = ext_req[m];
      tm_req[m].req = ext_req[m].req && to_gb[m];
    end
  end

  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      mem_rsp_t r;
      r = ev_rsp[i];
      r.gnt = (to_ev[i] && ev_rsp[i].gnt) || (to_err[i] && ext_req[i].req);
      if (i < int'(COLS)) begin
        r.gnt = r.gnt || (to_gb[i] && tm_rsp[i].gnt);
        if (tm_rsp[i].rvalid) r.rdata = tm_rsp[i].rdata;
        r.rvalid = r.rvalid || tm_rsp[i].rvalid;
      end
      if (err_rvalid_q[i]) r.rdata = '0;
      r.rvalid = r.rvalid || err_rvalid_q[i];
      ext_rsp[i] = r;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_rvalid_q <= '0;
    else for (int i = 0; i < N_CORES; i++)
      err_rvalid_q[i] <= ext_req[i].req && to_err[i] && !ext_req[i].we;
  end

  // ------------------------------------------- global buffer and TCDM
  mem_req_t host_tcdm_req;
  mem_rsp_t host_tcdm_rsp;
  logic [GB_BANKS-1:0]              gb_en, gb_we, gb_conflict;
  logic [GB_BANKS-1:0][GB_RAW-1:0]  gb_addr;
  logic [GB_BANKS-1:0][31:0]        gb_wdata, gb_rdata;

  assign tm_req[COLS]     = host_tcdm_req;
  assign host_tcdm_rsp    = tm_rsp[COLS];
  assign tm_req[COLS + 1] = dma_req;
  assign dma_rsp          = tm_rsp[COLS + 1];

  aia_tcdm_interco #(.N_MASTERS(N_TM), .N_BANKS(GB_BANKS), .BANK_WORDS(GB_WORDS)) u_tcdm (
    .clk, .rst_n, .m_req(tm_req), .m_rsp(tm_rsp),
    .b_en(gb_en), .b_we(gb_we), .b_addr(gb_addr), .b_wdata(gb_wdata), .b_rdata(gb_rdata),
    .conflict(gb_conflict)
  );

  aia_global_buffer #(.N_BANKS(GB_BANKS), .BANK_WORDS(GB_WORDS)) u_gbuf (
    .clk, .en(gb_en), .we(gb_we), .addr(gb_addr), .wdata(gb_wdata), .rdata(gb_rdata)
  );

  // ----------------------------------------------------------- event unit
  logic        ev_en, ev_we, ev_release;
  logic [7:0]  ev_addr;
  logic [31:0] ev_wdata, ev_rdata;

  aia_event_unit #(.N_CORES(N_CORES)) u_event (
    .clk, .rst_n, .core_req(ev_req), .core_rsp(ev_rsp),
    .host_en(ev_en), .host_we(ev_we), .host_addr(ev_addr), .host_wdata(ev_wdata),
    .host_rdata(ev_rdata), .release_o(ev_release)
  );

  // ------------------------------------------------- mesh interconnect
  aia_mesh_interco #(.N_CORES(N_CORES)) u_interco (
    .clk, .rst_n,
    .in_valid, .in_req, .in_pop,
    .out_push, .out_rdata, .out_full,
    .core_req(hreq), .core_rdata(hrdata),
    .tcdm_req(host_tcdm_req), .tcdm_rsp(host_tcdm_rsp),
    .ev_en, .ev_we, .ev_addr, .ev_wdata, .ev_rdata,
    .fetch_en, .core_done
  );

endmodule
