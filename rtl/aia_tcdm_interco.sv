// aia_tcdm_interco: logarithmic-style interconnect from the masters to the
// banks of the global buffer.
//
// Word addresses are interleaved over the banks: bank = word[log2(N_BANKS)-1:0],
// row = the word bits above. Each cycle, each bank grants at most one of the
// masters requesting it, round robin starting after the master it granted
// last; masters on different banks proceed in parallel. A master holds its
// request until `gnt`; read data return with `rvalid` one cycle after the
// grant. Masters: the top-row cores, the host path and the DMA port.
// Published: the TCDM interconnect joining the top four cores to the banked
// global buffer. Interleaving and round-robin arbitration are this design's.
module aia_tcdm_interco
  import aia_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 6,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048,
  localparam int unsigned BW        = $clog2(N_BANKS),
  localparam int unsigned RAW       = $clog2(BANK_WORDS),
  localparam int unsigned MW        = $clog2(N_MASTERS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  mem_req_t                      m_req [N_MASTERS],
  output mem_rsp_t                      m_rsp [N_MASTERS],
  output logic [N_BANKS-1:0]            b_en,
  output logic [N_BANKS-1:0]            b_we,
  output logic [N_BANKS-1:0][RAW-1:0]   b_addr,
  output logic [N_BANKS-1:0][31:0]      b_wdata,
  input  logic [N_BANKS-1:0][31:0]      b_rdata,
  output logic [N_BANKS-1:0]            conflict   // a bank refused a requester
);

  logic [N_MASTERS-1:0][BW-1:0] m_bank;
  logic [N_MASTERS-1:0]         gnt;
  logic [N_BANKS-1:0][MW-1:0]   rr_q, win;
  logic [N_MASTERS-1:0]         rvalid_q;
  logic [N_MASTERS-1:0][BW-1:0] rbank_q;

  always_comb begin
    for (int m = 0; m < N_MASTERS; m++) m_bank[m] = m_req[m].addr[2 +: BW];
    gnt      = '0;
    b_en     = '0;
    b_we     = '0;
    b_addr   = '0;
    b_wdata  = '0;
    win      = '0;
    conflict = '0;
    for (int b = 0; b < N_BANKS; b++) begin
      int unsigned nreq;
      logic found;
      nreq  = 0;
      found = 1'b0;
      for (int k = 1; k <= N_MASTERS; k++) begin
        int unsigned m;
        m = (int'(rr_q[b]) + k) % N_MASTERS;
        if (m_req[m].req && int'(m_bank[m]) == b) begin
          nreq++;
          if (!found) begin
            found     = 1'b1;
            win[b]    = MW'(m);
            gnt[m]    = 1'b1;
            b_en[b]   = 1'b1;
            b_we[b]   = m_req[m].we;
            b_addr[b] = m_req[m].addr[2+BW +: RAW];
            b_wdata[b] = m_req[m].wdata;
          end
        end
      end
      conflict[b] = (nreq > 1);
    end
    for (int m = 0; m < N_MASTERS; m++) begin
      m_rsp[m].gnt    = gnt[m];
      m_rsp[m].rvalid = rvalid_q[m];
      m_rsp[m].rdata  = b_rdata[rbank_q[m]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q     <= '0;
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      for (int b = 0; b < N_BANKS; b++) if (b_en[b]) rr_q[b] <= win[b];
      for (int m = 0; m < N_MASTERS; m++) begin
        rvalid_q[m] <= gnt[m] && !m_req[m].we;
        if (gnt[m]) rbank_q[m] <= m_bank[m];
      end
    end
  end

endmodule
