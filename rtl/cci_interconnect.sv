// CCI-like coherent interconnect of a cluster.
//
// Joins NM cache masters (the instruction and data L1 caches of every core) to
// the shared L2 cache and keeps the L1 copies coherent by snooping. It has the
// three layers the cluster's memory bus is built from: a request layer
// (arbitration and commands), a response layer (128-bit read and write data
// beats) and a snoop layer (broadcast to every cache but the requester).
//
// Operation. Masters raise bus_req; a round-robin arbiter grants one, which then
// owns the bus until it drops bus_req. While it owns the bus it issues commands,
// and each one runs to completion before done is pulsed:
//   WRITEBACK   the four beats of the victim line, fetched from the master by
//               wb_beat, are written to L2.
//   RD_SHARED   snoop the other caches (M->O, E->S). If one of them owns the line
//   RD_UNIQUE   (M or O) it supplies the four beats directly (cache-to-cache);
//               otherwise the line is read from L2. RD_UNIQUE and UPGRADE
//   UPGRADE     invalidate all other copies; UPGRADE moves no data.
// done_shared, valid with done, reports whether any other cache held the line.
//
// Timing: grant one cycle after the request is seen with the bus idle; snoop
// broadcast one cycle after the command, answers the cycle after that; a
// cache-to-cache line takes four beat cycles, then done.
//
// L2 port: l2_req_valid/l2_req_ready with l2_req_we and a line address; write
// beats on l2_wvalid/l2_wready; read beats on l2_rvalid; l2_done ends either.
//
// The paper calls for a crossbar-like, CCI-400-based interconnect with 128-bit
// read and write data channels and separate request, response and snoop layers,
// joining all cores into one coherent address space with one memory interface.
// Serialising coherent transactions on one granted bus and the command set are
// this design's simplification of that crossbar.
module cci_interconnect
  import mpsoc_pkg::*;
#(
  parameter int unsigned NM = 16   // 8 cores x (I + D)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request / response layers, one set per master
  input  logic [NM-1:0]         m_bus_req,
  output logic [NM-1:0]         m_bus_gnt,
  input  logic [NM-1:0]         m_cmd_valid,
  input  cci_cmd_t              m_cmd      [NM],
  input  line_addr_t            m_cmd_addr [NM],
  output logic [BEAT_IDX_W-1:0] m_wb_beat,
  input  beat_t                 m_wb_data  [NM],
  output logic [NM-1:0]         m_rd_valid,
  output beat_t                 m_rd_data,
  output logic [NM-1:0]         m_done,
  output logic                  m_done_shared,
  // snoop layer
  output logic [NM-1:0]         s_valid,
  output line_addr_t            s_addr,
  output logic                  s_inv,
  input  logic [NM-1:0]         s_resp_valid,
  input  logic [NM-1:0]         s_hit,
  input  logic [NM-1:0]         s_owner,
  output logic [BEAT_IDX_W-1:0] s_beat,
  input  beat_t                 s_data     [NM],
  // shared L2
  output logic                  l2_req_valid,
  input  logic                  l2_req_ready,
  output logic                  l2_req_we,
  output line_addr_t            l2_req_addr,
  output logic                  l2_wvalid,
  input  logic                  l2_wready,
  output beat_t                 l2_wdata,
  input  logic                  l2_rvalid,
  input  beat_t                 l2_rdata,
  input  logic                  l2_done
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  typedef enum logic [3:0] {
    C_IDLE, C_GRANT, C_SNOOP, C_SNOOP_RESP, C_C2C, C_L2_REQ, C_L2_WR, C_L2_RD, C_DONE
  } cstate_t;

  cstate_t               state_q;
  logic [MW-1:0]         gidx_q;     // granted master
  logic [MW-1:0]         rr_q;       // first master looked at by the arbiter
  cci_cmd_t              cmd_q;
  line_addr_t            addr_q;
  logic                  shared_q;
  logic [MW-1:0]         owner_q;
  logic [BEAT_IDX_W-1:0] beat_q;
  logic                  we_q;

  // Round-robin pick among requesters
  logic          any_req;
  logic [MW-1:0] pick;
  always_comb begin
    any_req = 1'b0;
    pick    = '0;
    for (int k = NM-1; k >= 0; k--) begin
      logic [MW-1:0] i;
      i = MW'((int'(rr_q) + k) % NM);
      if (m_bus_req[i]) begin
        any_req = 1'b1;
        pick    = i;
      end
    end
  end

  // Snoop answers from every master but the requester
  logic [NM-1:0] others;
  logic          any_owner;
  logic [MW-1:0] owner_idx;
  always_comb begin
    others = '1;
    others[gidx_q] = 1'b0;
    any_owner = 1'b0;
    owner_idx = '0;
    for (int i = NM-1; i >= 0; i--) begin
      if (others[i] && s_resp_valid[i] && s_owner[i]) begin
        any_owner = 1'b1;
        owner_idx = MW'(i);
      end
    end
  end

  // Outputs
  always_comb begin
    m_bus_gnt     = '0;
    m_rd_valid    = '0;
    m_done        = '0;
    s_valid       = '0;
    m_bus_gnt[gidx_q] = (state_q != C_IDLE);
    m_done[gidx_q]    = (state_q == C_DONE);
    m_done_shared = shared_q;
    m_wb_beat     = beat_q;
    s_beat        = beat_q;
    s_addr        = addr_q;
    s_inv         = (cmd_q != CMD_RD_SHARED);
    if (state_q == C_SNOOP) s_valid = others;

    l2_req_valid  = (state_q == C_L2_REQ);
    l2_req_we     = we_q;
    l2_req_addr   = addr_q;
    l2_wvalid     = (state_q == C_L2_WR);
    l2_wdata      = m_wb_data[gidx_q];

    if (state_q == C_C2C) begin
      m_rd_valid[gidx_q] = 1'b1;
      m_rd_data          = s_data[owner_q];
    end else begin
      m_rd_valid[gidx_q] = (state_q == C_L2_RD) && l2_rvalid;
      m_rd_data          = l2_rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= C_IDLE;
      gidx_q   <= '0;
      rr_q     <= '0;
      cmd_q    <= CMD_RD_SHARED;
      addr_q   <= '0;
      shared_q <= 1'b0;
      owner_q  <= '0;
      beat_q   <= '0;
      we_q     <= 1'b0;
    end else begin
      unique case (state_q)
        C_IDLE: begin
          if (any_req) begin
            gidx_q  <= pick;
            state_q <= C_GRANT;
          end
        end

        C_GRANT: begin
          if (!m_bus_req[gidx_q]) begin
            rr_q    <= (gidx_q == MW'(NM-1)) ? '0 : gidx_q + 1'b1;
            state_q <= C_IDLE;
          end else if (m_cmd_valid[gidx_q]) begin
            cmd_q    <= m_cmd[gidx_q];
            addr_q   <= m_cmd_addr[gidx_q];
            shared_q <= 1'b0;
            beat_q   <= '0;
            if (m_cmd[gidx_q] == CMD_WRITEBACK) begin
              we_q    <= 1'b1;
              state_q <= C_L2_REQ;
            end else begin
              state_q <= C_SNOOP;
            end
          end
        end

        C_SNOOP: state_q <= C_SNOOP_RESP;

        C_SNOOP_RESP: begin
          shared_q <= |(s_hit & s_resp_valid & others);
          owner_q  <= owner_idx;
          if (cmd_q == CMD_UPGRADE) begin
            state_q <= C_DONE;
          end else if (any_owner) begin
            state_q <= C_C2C;
          end else begin
            we_q    <= 1'b0;
            state_q <= C_L2_REQ;
          end
        end

        C_C2C: begin
          beat_q <= beat_q + 1'b1;
          if (beat_q == BEAT_IDX_W'(BEATS-1)) state_q <= C_DONE;
        end

        C_L2_REQ: begin
          if (l2_req_ready) state_q <= we_q ? C_L2_WR : C_L2_RD;
        end

        C_L2_WR: begin
          if (l2_wready) beat_q <= beat_q + 1'b1;
          if (l2_done)   state_q <= C_DONE;
        end

        C_L2_RD: begin
          if (l2_done) state_q <= C_DONE;
        end

        C_DONE: state_q <= C_GRANT;

        default: state_q <= C_IDLE;
      endcase
    end
  end

  // Bus rules
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(m_bus_gnt))
    else $error("cci_interconnect: more than one grant");
  a_cmd_holds_bus: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q inside {C_SNOOP, C_SNOOP_RESP, C_C2C, C_L2_REQ, C_L2_WR, C_L2_RD})
      |-> m_bus_req[gidx_q])
    else $error("cci_interconnect: master dropped the bus during a command");

endmodule
