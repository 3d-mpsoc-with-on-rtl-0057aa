// Shared L2 cache of a cluster.
//
// One L2 serves all eight cores of a cluster; in the 3D stack it sits in the
// tier below the cores and is reached through the CCI-like interconnect over
// TSVs. It is 1 MB, 16-way set associative, with 64-byte lines, pseudo-random
// replacement, write-back and write-allocate. The L1 caches above it keep
// coherence among themselves; the L2 only stores lines and talks to main memory.
//
// How it works. After reset the tag array is cleared one set per cycle
// (SETS cycles, req_ready low meanwhile), as an SRAM tag array must be. Tag,
// valid and dirty bits of all ways of a set share one array row, so a lookup
// reads one row. A request (line address, read or write) is looked up one cycle
// after it is accepted. On a hit a read returns four 128-bit beats on
// consecutive cycles and a write takes four beats. On a miss the victim is an
// invalid way if there is one, otherwise the way named by a free-running 16-bit
// LFSR; a dirty victim is first written to memory. A read miss then fetches the
// line from memory and returns it; a write miss needs no fetch, because the L1
// always writes back a whole line. done is pulsed one cycle after the last
// beat of either kind.
//
// Interface: req_valid/req_ready, req_we, req_addr; wvalid/wready/wdata for
// write beats; rvalid/rdata for read beats (no back-pressure); done.
// Memory side: mem_req_valid/mem_req_ready, mem_req_we, mem_req_addr; write
// beats on mem_wvalid/mem_wready; read beats arrive on mem_rvalid.
//
// Size, ways, line size and pseudo-random replacement are the paper's figures
// for the shared L2. The LFSR, write-back/write-allocate policy, port protocol
// and timing are this design's choices.
module l2_cache
  import mpsoc_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 1048576,  // 1 MB
  parameter int unsigned WAYS       = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the interconnect
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  line_addr_t  req_addr,
  input  logic        wvalid,
  output logic        wready,
  input  beat_t       wdata,
  output logic        rvalid,
  output beat_t       rdata,
  output logic        done,
  // to main memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output line_addr_t  mem_req_addr,
  output logic        mem_wvalid,
  input  logic        mem_wready,
  output beat_t       mem_wdata,
  input  logic        mem_rvalid,
  input  beat_t       mem_rdata
);

  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned WW    = $clog2(WAYS);

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WW-1:0]    way_t;

  function automatic int unsigned didx(idx_t s, way_t w, logic [BEAT_IDX_W-1:0] b);
    return ((int'(s) * WAYS) + int'(w)) * BEATS + int'(b);
  endfunction

  typedef struct packed {
    logic valid;
    logic dirty;
    tag_t tag;
  } meta_t;
  typedef meta_t [WAYS-1:0] row_t;

  beat_t data_mem [SETS*WAYS*BEATS];
  row_t  meta_mem [SETS];

  typedef enum logic [3:0] {
    L_INIT, L_IDLE, L_LOOKUP, L_EVICT_REQ, L_EVICT_WR, L_FILL_REQ, L_FILL, L_WR, L_RD, L_DONE
  } lstate_t;

  lstate_t               state_q;
  logic                  we_q;
  line_addr_t            addr_q;
  way_t                  way_q;
  logic [BEAT_IDX_W-1:0] beat_q;
  logic [15:0]           lfsr_q;
  idx_t                  init_q;

  idx_t set;
  tag_t tag;
  assign set = addr_q[IDX_W-1:0];
  assign tag = addr_q[LADDR_W-1:IDX_W];

  row_t row;
  assign row = meta_mem[set];

  logic hit;
  way_t hway;
  logic any_invalid;
  way_t inv_way;
  always_comb begin
    hit = 1'b0;
    hway = '0;
    any_invalid = 1'b0;
    inv_way = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (row[w].valid && row[w].tag == tag) begin
        hit  = 1'b1;
        hway = way_t'(w);
      end
      if (!row[w].valid) begin
        any_invalid = 1'b1;
        inv_way     = way_t'(w);
      end
    end
  end

  way_t victim;
  assign victim = any_invalid ? inv_way : lfsr_q[WW-1:0];

  logic last_beat;
  assign last_beat = (beat_q == BEAT_IDX_W'(BEATS-1));

  // Port outputs
  assign req_ready     = (state_q == L_IDLE);
  assign wready        = (state_q == L_WR);
  assign rvalid        = (state_q == L_RD);
  assign rdata         = data_mem[didx(set, way_q, beat_q)];
  assign done          = (state_q == L_DONE);
  assign mem_req_valid = (state_q == L_EVICT_REQ) || (state_q == L_FILL_REQ);
  assign mem_req_we    = (state_q == L_EVICT_REQ);
  assign mem_req_addr  = (state_q == L_EVICT_REQ) ? {row[way_q].tag, set} : addr_q;
  assign mem_wvalid    = (state_q == L_EVICT_WR);
  assign mem_wdata     = data_mem[didx(set, way_q, beat_q)];

  // Data array: one write port, for write beats from the interconnect or fill
  // beats from memory.
  logic  data_we;
  beat_t data_wbeat;
  assign data_we    = (state_q == L_WR && wvalid) || (state_q == L_FILL && mem_rvalid);
  assign data_wbeat = (state_q == L_WR) ? wdata : mem_rdata;

  always_ff @(posedge clk) begin
    if (data_we) data_mem[didx(set, way_q, beat_q)] <= data_wbeat;
  end

  // Tag array: one write port, a whole row at a time. A tag is written only
  // with the beat that makes its line valid, so a victim keeps its own tag
  // while it is written back.
  logic meta_we;
  idx_t meta_waddr;
  row_t meta_wrow;
  always_comb begin
    meta_we    = 1'b0;
    meta_waddr = set;
    meta_wrow  = row;
    unique case (state_q)
      L_INIT: begin
        meta_we    = 1'b1;
        meta_waddr = init_q;
        meta_wrow  = '0;
      end
      L_LOOKUP: if (!hit && !(row[victim].valid && row[victim].dirty)) begin
        meta_we = 1'b1;
        meta_wrow[victim].valid = 1'b0;
      end
      L_EVICT_WR: if (mem_wready && last_beat) begin
        meta_we = 1'b1;
        meta_wrow[way_q] = '0;
      end
      L_FILL: if (mem_rvalid && last_beat) begin
        meta_we = 1'b1;
        meta_wrow[way_q] = '{valid: 1'b1, dirty: 1'b0, tag: tag};
      end
      L_WR: if (wvalid && last_beat) begin
        meta_we = 1'b1;
        meta_wrow[way_q] = '{valid: 1'b1, dirty: 1'b1, tag: tag};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (meta_we) meta_mem[meta_waddr] <= meta_wrow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= L_INIT;
      we_q    <= 1'b0;
      addr_q  <= '0;
      way_q   <= '0;
      beat_q  <= '0;
      lfsr_q  <= 16'hACE1;
      init_q  <= '0;
    end else begin
      // x^16 + x^14 + x^13 + x^11 + 1, one step per cycle
      lfsr_q <= {lfsr_q[14:0], lfsr_q[15] ^ lfsr_q[13] ^ lfsr_q[12] ^ lfsr_q[10]};

      unique case (state_q)
        L_INIT: begin
          init_q <= init_q + 1'b1;
          if (init_q == idx_t'(SETS-1)) state_q <= L_IDLE;
        end

        L_IDLE: begin
          if (req_valid) begin
            we_q    <= req_we;
            addr_q  <= req_addr;
            state_q <= L_LOOKUP;
          end
        end

        L_LOOKUP: begin
          beat_q <= '0;
          if (hit) begin
            way_q   <= hway;
            state_q <= we_q ? L_WR : L_RD;
          end else begin
            way_q <= victim;
            if (row[victim].valid && row[victim].dirty) state_q <= L_EVICT_REQ;
            else                                        state_q <= we_q ? L_WR : L_FILL_REQ;
          end
        end

        L_EVICT_REQ: if (mem_req_ready) state_q <= L_EVICT_WR;

        L_EVICT_WR: begin
          if (mem_wready) begin
            beat_q <= beat_q + 1'b1;
            if (last_beat) state_q <= we_q ? L_WR : L_FILL_REQ;
          end
        end

        L_FILL_REQ: if (mem_req_ready) state_q <= L_FILL;

        L_FILL: begin
          if (mem_rvalid) begin
            beat_q <= beat_q + 1'b1;
            if (last_beat) state_q <= L_RD;
          end
        end

        L_WR: begin
          if (wvalid) begin
            beat_q <= beat_q + 1'b1;
            if (last_beat) state_q <= L_DONE;
          end
        end

        L_RD: begin
          beat_q <= beat_q + 1'b1;
          if (last_beat) state_q <= L_DONE;
        end

        L_DONE: state_q <= L_IDLE;

        default: state_q <= L_IDLE;
      endcase
    end
  end

endmodule
