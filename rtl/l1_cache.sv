// Private L1 cache with MOESI snooping coherence.
//
// Every core of the cluster has two of these, one for instructions and one for
// data, each 32 KB, 2-way set associative, with 64-byte lines and LRU
// replacement. They keep coherent with all other L1 caches through the CCI-like
// interconnect, which serialises coherent transactions and broadcasts snoops.
//
// Core side: one 32-bit load or store at a time (req_valid/req_ready, then a
// single resp_valid pulse carrying the load data). A hit is answered two cycles
// after the request is accepted: one cycle to capture it, one to look it up.
//
// Bus side, in three layers:
//   * request layer: the cache raises bus_req and waits for bus_gnt. While the
//     grant lasts no other cache can start a transaction, so line states seen
//     from here on are stable. The cache then issues one or more commands
//     (cmd_valid/cmd/cmd_addr), each closed by a done pulse from the
//     interconnect, and drops bus_req to let the bus go.
//   * response layer: line data arrives as four 128-bit beats on rd_valid /
//     rd_data; a write-back hands its beats out on wb_data, the beat chosen by
//     wb_beat from the interconnect. done_shared tells, at the end of a shared
//     read, whether another cache kept a copy (fill in S) or not (fill in E).
//   * snoop layer: snp_valid with snp_addr asks whether this cache holds a line;
//     snp_inv says the line must be invalidated (a read for ownership or an
//     upgrade), otherwise it is a shared read and M/E copies fall to O/S. The
//     answer (snp_hit, snp_owner) is registered and valid one cycle later with
//     snp_resp_valid; an owner (M or O) then supplies the line on snp_data, the
//     beat chosen by snp_beat.
//
// After reset the state/tag array is cleared one set per cycle (SETS cycles,
// req_ready low meanwhile), as an SRAM array must be. The LRU bit and the state
// and tag of both ways of a set share one array row, written through a single
// port: a snoop and the control FSM never write in the same cycle, because the
// FSM only writes while it owns the bus (no snoops reach it then) or, in
// S_LOOKUP, in a cycle without a snoop.
//
// A miss evicts the least recently used way (an invalid way first); a dirty
// victim (M or O) is written back before the fill. A store to a line held S or O
// sends an upgrade that invalidates the other copies. Stores fill with a read for
// ownership (write-allocate).
//
// From the paper: size, associativity, line size, LRU policy, MOESI protocol,
// 128-bit data channels. This design's own choices: the command set, the
// serialised bus with grant, the word-wide core port, the two-cycle hit timing.
module l1_cache
  import mpsoc_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,  // 32 KB
  parameter int unsigned WAYS       = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  // core
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [WORD_W-1:0] req_wdata,
  output logic             resp_valid,
  output logic [WORD_W-1:0] resp_rdata,
  // bus: request and response layers
  output logic             bus_req,
  input  logic             bus_gnt,
  output logic             cmd_valid,
  output cci_cmd_t         cmd,
  output line_addr_t       cmd_addr,
  input  logic [BEAT_IDX_W-1:0] wb_beat,
  output beat_t            wb_data,
  input  logic             rd_valid,
  input  beat_t            rd_data,
  input  logic             done,
  input  logic             done_shared,
  // bus: snoop layer
  input  logic             snp_valid,
  input  line_addr_t       snp_addr,
  input  logic             snp_inv,
  output logic             snp_resp_valid,
  output logic             snp_hit,
  output logic             snp_owner,
  input  logic [BEAT_IDX_W-1:0] snp_beat,
  output beat_t            snp_data
);

  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned WPB   = BEAT_W / WORD_W;     // words per beat
  localparam int unsigned WSEL_W = $clog2(WPB);

  if (WAYS != 2) begin : g_ways_check
    $error("l1_cache: the LRU bit per set supports exactly 2 ways");
  end

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;

  function automatic idx_t idx_of(line_addr_t la);
    return la[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(line_addr_t la);
    return la[LADDR_W-1:IDX_W];
  endfunction
  // data array word index: {set, way, beat}
  function automatic int unsigned didx(idx_t s, logic w, logic [BEAT_IDX_W-1:0] b);
    return ((int'(s) * WAYS) + int'(w)) * BEATS + int'(b);
  endfunction

  // Arrays ----------------------------------------------------------------------
  typedef struct packed {
    moesi_t st;
    tag_t   tag;
  } way_meta_t;
  typedef struct packed {
    logic                       lru;   // way to evict next
    way_meta_t [WAYS-1:0]       way;
  } row_t;

  beat_t data_mem [SETS*WAYS*BEATS];
  row_t  meta_mem [SETS];

  // Captured core request --------------------------------------------------------
  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_ARB, S_DECIDE, S_WB, S_FILL, S_UPG
  } state_t;

  state_t                 state_q;
  logic                   own_bus_q;
  logic                   we_q;
  logic [ADDR_W-1:0]      addr_q;
  logic [WORD_W-1:0]      wdata_q;
  logic                   vway_q;        // victim / fill way
  logic                   hway_q;        // way that hit, for an upgrade
  logic [BEAT_IDX_W-1:0]  beat_q;        // fill beat counter
  idx_t                   init_q;        // set cleared by the reset sweep

  line_addr_t             rline;
  idx_t                   rset;
  tag_t                   rtag;
  logic [BEAT_IDX_W-1:0]  rbeat;
  logic [WSEL_W-1:0]      rword;

  assign rline = addr_q[ADDR_W-1:OFF_W];
  assign rset  = idx_of(rline);
  assign rtag  = tag_of(rline);
  assign rbeat = addr_q[OFF_W-1 -: BEAT_IDX_W];
  assign rword = addr_q[$clog2(WORD_W/8) +: WSEL_W];

  row_t rrow;
  assign rrow = meta_mem[rset];

  // Lookup of the captured request
  logic   hit;
  logic   hway;
  moesi_t hst;
  always_comb begin
    hit  = 1'b0;
    hway = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (rrow.way[w].st != ST_I && rrow.way[w].tag == rtag) begin
        hit  = 1'b1;
        hway = w[0];
      end
    end
    hst = rrow.way[hway].st;
  end

  logic writable;
  assign writable = (hst == ST_M) || (hst == ST_E);

  // Victim choice: an invalid way, else the LRU way.
  logic vway;
  always_comb begin
    vway = rrow.lru;
    for (int w = WAYS-1; w >= 0; w--)
      if (rrow.way[w].st == ST_I) vway = w[0];
  end

  // Snoop lookup
  idx_t sset;
  tag_t stag;
  logic shit;
  logic sway;
  assign sset = idx_of(snp_addr);
  assign stag = tag_of(snp_addr);
  row_t srow;
  assign srow = meta_mem[sset];
  always_comb begin
    shit = 1'b0;
    sway = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (srow.way[w].st != ST_I && srow.way[w].tag == stag) begin
        shit = 1'b1;
        sway = w[0];
      end
    end
  end

  idx_t snp_set_q;
  logic snp_way_q;
  assign snp_data = data_mem[didx(snp_set_q, snp_way_q, snp_beat)];
  assign wb_data  = data_mem[didx(rset, vway_q, wb_beat)];

  // Outputs of the control FSM
  assign req_ready = (state_q == S_IDLE);
  assign bus_req   = (state_q == S_ARB) || (state_q == S_DECIDE) || (state_q == S_WB) ||
                     (state_q == S_FILL) || (state_q == S_UPG) ||
                     (state_q == S_LOOKUP && own_bus_q);
  assign cmd_valid = (state_q == S_WB) || (state_q == S_FILL) || (state_q == S_UPG);
  always_comb begin
    unique case (state_q)
      S_WB:    begin cmd = CMD_WRITEBACK; cmd_addr = {rrow.way[vway_q].tag, rset}; end
      S_UPG:   begin cmd = CMD_UPGRADE;   cmd_addr = rline; end
      default: begin cmd = we_q ? CMD_RD_UNIQUE : CMD_RD_SHARED; cmd_addr = rline; end
    endcase
  end

  // A hit of the captured request completes in this cycle.
  logic lookup_done;
  assign lookup_done = (state_q == S_LOOKUP) && !(snp_valid && !own_bus_q) &&
                       hit && (!we_q || writable);

  beat_t hbeat;   // the beat holding the requested word
  assign hbeat = data_mem[didx(rset, hway, rbeat)];

  // Data array, one write port: a store hit rewrites its word within the beat,
  // a fill writes a whole beat.
  logic        data_we;
  int unsigned data_widx;
  beat_t       data_wbeat;
  always_comb begin
    data_we    = 1'b0;
    data_widx  = didx(rset, vway_q, beat_q);
    data_wbeat = rd_data;
    if (lookup_done && we_q) begin
      data_we    = 1'b1;
      data_widx  = didx(rset, hway, rbeat);
      data_wbeat = hbeat;
      data_wbeat[int'(rword)*WORD_W +: WORD_W] = wdata_q;
    end else if (state_q == S_FILL && rd_valid) begin
      data_we = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (data_we) data_mem[data_widx] <= data_wbeat;
  end

  // State/tag array, one write port, a whole row at a time.
  logic fsm_meta_we;
  row_t fsm_row;
  always_comb begin
    fsm_meta_we = 1'b0;
    fsm_row     = rrow;
    unique case (state_q)
      S_LOOKUP: if (lookup_done) begin
        fsm_meta_we = 1'b1;
        fsm_row.lru = ~hway;
        if (we_q) fsm_row.way[hway].st = ST_M;
      end
      S_WB: if (done) begin
        fsm_meta_we = 1'b1;
        fsm_row.way[vway_q].st = ST_I;
      end
      S_FILL: if (done) begin
        fsm_meta_we = 1'b1;
        fsm_row.way[vway_q].tag = rtag;
        fsm_row.way[vway_q].st  = we_q ? ST_M : (done_shared ? ST_S : ST_E);
      end
      S_UPG: if (done) begin
        fsm_meta_we = 1'b1;
        fsm_row.way[hway_q].st = ST_M;
      end
      default: ;
    endcase
  end

  logic snp_meta_we;
  row_t snp_row;
  always_comb begin
    snp_meta_we = snp_valid && shit;
    snp_row     = srow;
    if (snp_inv)                         snp_row.way[sway].st = ST_I;
    else if (srow.way[sway].st == ST_M)  snp_row.way[sway].st = ST_O;
    else if (srow.way[sway].st == ST_E)  snp_row.way[sway].st = ST_S;
  end

  logic meta_we;
  idx_t meta_waddr;
  row_t meta_wrow;
  always_comb begin
    if (state_q == S_INIT) begin
      meta_we    = 1'b1;
      meta_waddr = init_q;
      meta_wrow  = '0;
    end else if (snp_meta_we) begin
      meta_we    = 1'b1;
      meta_waddr = sset;
      meta_wrow  = snp_row;
    end else begin
      meta_we    = fsm_meta_we;
      meta_waddr = rset;
      meta_wrow  = fsm_row;
    end
  end

  always_ff @(posedge clk) begin
    if (meta_we) meta_mem[meta_waddr] <= meta_wrow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_INIT;
      own_bus_q      <= 1'b0;
      we_q           <= 1'b0;
      addr_q         <= '0;
      wdata_q        <= '0;
      vway_q         <= 1'b0;
      hway_q         <= 1'b0;
      beat_q         <= '0;
      resp_valid     <= 1'b0;
      resp_rdata     <= '0;
      snp_resp_valid <= 1'b0;
      snp_hit        <= 1'b0;
      snp_owner      <= 1'b0;
      snp_set_q      <= '0;
      snp_way_q      <= 1'b0;
      init_q         <= '0;
    end else begin
      resp_valid <= 1'b0;

      // Snoop layer --------------------------------------------------------------
      snp_resp_valid <= snp_valid;
      if (snp_valid) begin
        snp_hit   <= shit;
        snp_owner <= shit && (srow.way[sway].st == ST_M || srow.way[sway].st == ST_O);
        snp_set_q <= sset;
        snp_way_q <= sway;
      end

      // Control FSM ---------------------------------------------------------------
      unique case (state_q)
        S_INIT: begin
          init_q <= init_q + 1'b1;
          if (init_q == idx_t'(SETS-1)) state_q <= S_IDLE;
        end

        S_IDLE: begin
          if (req_valid) begin
            we_q    <= req_we;
            addr_q  <= req_addr;
            wdata_q <= req_wdata;
            state_q <= S_LOOKUP;
          end
        end

        S_LOOKUP: begin
          // A snoop this cycle may change the line: look again next cycle.
          if (!(snp_valid && !own_bus_q)) begin
            if (lookup_done) begin
              resp_rdata  <= hbeat[int'(rword)*WORD_W +: WORD_W];
              resp_valid  <= 1'b1;
              own_bus_q   <= 1'b0;
              state_q     <= S_IDLE;
            end else begin
              state_q <= own_bus_q ? S_DECIDE : S_ARB;
            end
          end
        end

        S_ARB: begin
          if (bus_gnt) begin
            own_bus_q <= 1'b1;
            state_q   <= S_DECIDE;
          end
        end

        S_DECIDE: begin
          // The bus is held: no snoop can reach this cache until it is released.
          if (hit) begin
            hway_q  <= hway;
            state_q <= (we_q && !writable) ? S_UPG : S_LOOKUP;
          end else begin
            vway_q  <= vway;
            beat_q  <= '0;
            state_q <= (rrow.way[vway].st == ST_M || rrow.way[vway].st == ST_O) ? S_WB : S_FILL;
          end
        end

        S_WB: if (done) state_q <= S_FILL;

        S_FILL: begin
          if (rd_valid) beat_q <= beat_q + 1'b1;
          if (done) state_q <= S_LOOKUP;
        end

        S_UPG: if (done) state_q <= S_LOOKUP;

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rules
  a_done_only_with_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> cmd_valid)
    else $error("l1_cache: done without an outstanding command");
  a_one_array_write: assert property (@(posedge clk) disable iff (!rst_n)
    !(snp_meta_we && (fsm_meta_we || state_q == S_INIT)))
    else $error("l1_cache: snoop and own request write the state array together");
  a_gnt_only_on_req: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_ARB && bus_gnt) |-> bus_req)
    else $error("l1_cache: grant without request");

endmodule
