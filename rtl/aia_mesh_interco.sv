// aia_mesh_interco: host-side interconnect of the accelerator mesh.
//
// Takes host requests one at a time from the request FIFO and routes them by
// address (bits [31:28] region, see aia_pkg):
//   0x1cc0_0000 : core cc scratchpads (bit 15: 0 instruction, 1 data memory)
//   0x2000_0000 : global buffer, through the TCDM interconnect
//   0x3000_0000 : event unit registers (0x00-0x0F) and the control
//                 registers FETCH (0x10, fetch-enable mask, read/write) and
//                 DONE (0x14, halted-core mask, read only)
// Writes are posted; a read pushes one word into the response FIFO (0 for an
// unmapped address). One request is in flight at a time:
// IDLE -> ISSUE (drive the target, held until the TCDM grants) -> READ
// (capture the data one cycle later) -> PUSH (wait for room) -> IDLE.
// Published: a mesh interconnect joins the SoC side, the DMA, the event unit
// and the cores. Its address map and protocol are this design's choice.
module aia_mesh_interco
  import aia_pkg::*;
#(
  parameter int unsigned N_CORES = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // request FIFO (show-ahead)
  input  logic                       in_valid,
  input  host_req_t                  in_req,
  output logic                       in_pop,
  // response FIFO
  output logic                       out_push,
  output logic [31:0]                out_rdata,
  input  logic                       out_full,
  // core scratchpads
  output mem_req_t                   core_req [N_CORES],
  input  logic [31:0]                core_rdata [N_CORES],
  // global buffer
  output mem_req_t                   tcdm_req,
  input  mem_rsp_t                   tcdm_rsp,
  // event unit
  output logic                       ev_en,
  output logic                       ev_we,
  output logic [7:0]                 ev_addr,
  output logic [31:0]                ev_wdata,
  input  logic [31:0]                ev_rdata,
  // core control
  output logic [N_CORES-1:0]         fetch_en,
  input  logic [N_CORES-1:0]         core_done
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_READ, S_PUSH} state_e;
  typedef enum logic [2:0] {T_CORE, T_GBUF, T_EVENT, T_CTRL, T_NONE} target_e;

  state_e      state;
  host_req_t   cur;
  target_e     tgt;
  logic [3:0]  core_sel;
  logic [31:0] rdata_q, ctrl_rdata;
  logic        issue_ok;
  logic [31:0] core_rd;

  always_comb begin
    core_sel = cur.addr[19:16];
    case (cur.addr[31:28])
      REGION_CORE:  tgt = (32'(core_sel) < N_CORES) ? T_CORE : T_NONE;
      REGION_GBUF:  tgt = T_GBUF;
      REGION_EVENT: tgt = (cur.addr[7:0] >= CTRL_FETCH) ? T_CTRL : T_EVENT;
      default:      tgt = T_NONE;
    endcase
    issue_ok = (state == S_ISSUE) && (tgt != T_GBUF || tcdm_rsp.gnt);
    core_rd  = '0;
    for (int c = 0; c < N_CORES; c++) if (32'(core_sel) == c) core_rd = core_rdata[c];
  end

  always_comb begin
    for (int c = 0; c < N_CORES; c++) begin
      core_req[c]       = '0;
      core_req[c].req   = (state == S_ISSUE) && tgt == T_CORE && 32'(core_sel) == c;
      core_req[c].we    = cur.we;
      core_req[c].addr  = cur.addr;
      core_req[c].wdata = cur.wdata;
    end
    tcdm_req       = '0;
    tcdm_req.req   = (state == S_ISSUE) && tgt == T_GBUF;
    tcdm_req.we    = cur.we;
    tcdm_req.addr  = cur.addr;
    tcdm_req.wdata = cur.wdata;
    ev_en    = (state == S_ISSUE) && tgt == T_EVENT;
    ev_we    = cur.we;
    ev_addr  = cur.addr[7:0];
    ev_wdata = cur.wdata;
    in_pop    = (state == S_IDLE) && in_valid;
    out_push  = (state == S_PUSH) && !out_full;
    out_rdata = rdata_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      rdata_q    <= '0;
      ctrl_rdata <= '0;
      fetch_en   <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          cur   <= in_req;
          state <= S_ISSUE;
        end
        S_ISSUE: if (issue_ok) begin
          if (tgt == T_CTRL) begin
            if (cur.we && cur.addr[7:0] == CTRL_FETCH) fetch_en <= cur.wdata[N_CORES-1:0];
            ctrl_rdata <= (cur.addr[7:0] == CTRL_FETCH) ? 32'(fetch_en) :
                          (cur.addr[7:0] == CTRL_DONE)  ? 32'(core_done) : 32'd0;
          end
          state <= cur.we ? S_IDLE : S_READ;
        end
        S_READ: begin
          case (tgt)
            T_CORE:  rdata_q <= core_rd;
            T_GBUF:  rdata_q <= tcdm_rsp.rdata;
            T_EVENT: rdata_q <= ev_rdata;
            T_CTRL:  rdata_q <= ctrl_rdata;
            default: rdata_q <= '0;
          endcase
          state <= S_PUSH;
        end
        default: if (!out_full) state <= S_IDLE;
      endcase
    end
  end

endmodule
