// Wormhole router of the inter-processor message NoC.
//
// One router sits beside every processing element and links it to its four
// mesh neighbours (north, south, east, west) and to its own core (local port).
// Each of the five inputs has a small FIFO. The head flit at the front of an
// input FIFO is routed dimension-order (X first, then Y) towards the
// destination written in its low data bits. An output that is free is granted
// round-robin to one of the inputs whose head asks for it and stays locked to
// that input until the packet's tail (or single) flit has passed, so the flits
// of a packet are never interleaved with those of another.
//
// Interface: per port, flit + valid/ready on the input and on the output. A
// flit moves when valid and ready are both high at a rising clock edge.
// Timing: a flit written into an input FIFO can leave on the next cycle, so a
// router adds one cycle of latency per hop when the output is free.
//
// The paper specifies a packet-based NoC of routers with inter-router links
// (its Fig. 31(a)); the FIFO depth, wormhole switching, XY routing and the
// valid/ready link protocol are this design's choices.
module noc_router
  import mpsoc_pkg::*;
#(
  parameter int unsigned MY_X  = 0,
  parameter int unsigned MY_Y  = 0,
  parameter int unsigned DEPTH = 4   // input FIFO depth in flits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  flit_t             in_flit  [NPORTS],
  input  logic [NPORTS-1:0] in_valid,
  output logic [NPORTS-1:0] in_ready,
  output flit_t             out_flit [NPORTS],
  output logic [NPORTS-1:0] out_valid,
  input  logic [NPORTS-1:0] out_ready
);

  localparam int unsigned PW = $clog2(NPORTS);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  // Input FIFOs ---------------------------------------------------------------
  flit_t             fifo_mem [NPORTS][DEPTH];
  logic [AW-1:0]     rd_ptr   [NPORTS];
  logic [AW-1:0]     wr_ptr   [NPORTS];
  logic [AW:0]       count    [NPORTS];
  flit_t             front    [NPORTS];
  logic [NPORTS-1:0] fvalid;
  logic [NPORTS-1:0] pop;
  logic [NPORTS-1:0] push;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      front[p]    = fifo_mem[p][rd_ptr[p]];
      fvalid[p]   = (count[p] != '0);
      in_ready[p] = (count[p] != (AW+1)'(DEPTH));
      push[p]     = in_valid[p] && in_ready[p];
    end
  end

  // FIFO storage has no reset: only entries between the pointers are read.
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++)
      if (push[p]) fifo_mem[p][wr_ptr[p]] <= in_flit[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        rd_ptr[p] <= '0;
        wr_ptr[p] <= '0;
        count[p]  <= '0;
      end
    end else begin
      for (int p = 0; p < NPORTS; p++) begin
        if (push[p])
          wr_ptr[p] <= (wr_ptr[p] == AW'(DEPTH-1)) ? '0 : wr_ptr[p] + 1'b1;
        if (pop[p])
          rd_ptr[p] <= (rd_ptr[p] == AW'(DEPTH-1)) ? '0 : rd_ptr[p] + 1'b1;
        count[p] <= count[p] + (AW+1)'(push[p]) - (AW+1)'(pop[p]);
      end
    end
  end

  // XY route of the head flit at each FIFO front -------------------------------
  logic [PW-1:0] route [NPORTS];
  logic [NPORTS-1:0] is_head;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      logic [COORD_W-1:0] dx, dy;
      dx = front[p].data[COORD_W-1:0];
      dy = front[p].data[2*COORD_W-1:COORD_W];
      is_head[p] = fvalid[p] &&
                   (front[p].kind == FL_HEAD || front[p].kind == FL_SINGLE);
      if (dx > COORD_W'(MY_X))      route[p] = PW'(P_EAST);
      else if (dx < COORD_W'(MY_X)) route[p] = PW'(P_WEST);
      else if (dy > COORD_W'(MY_Y)) route[p] = PW'(P_NORTH);
      else if (dy < COORD_W'(MY_Y)) route[p] = PW'(P_SOUTH);
      else                          route[p] = PW'(P_LOCAL);
    end
  end

  // Output allocation: lock per output, round-robin among requesting heads ---
  logic [NPORTS-1:0] locked;
  logic [PW-1:0]     owner [NPORTS];
  logic [PW-1:0]     rr    [NPORTS];   // input checked first on next grant
  logic [NPORTS-1:0] grant_ok;
  logic [PW-1:0]     grant_in [NPORTS];

  // Requests per output; the winner is the lowest requesting input at or above
  // rr, or failing that the lowest requesting input (round-robin from rr).
  logic [NPORTS-1:0] req    [NPORTS];
  logic [NPORTS-1:0] req_hi [NPORTS];
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      for (int p = 0; p < NPORTS; p++) begin
        req[o][p]    = !locked[o] && is_head[p] && (route[p] == PW'(o));
        req_hi[o][p] = req[o][p] && (PW'(p) >= rr[o]);
      end
      grant_ok[o] = |req[o];
      grant_in[o] = '0;
      for (int p = NPORTS-1; p >= 0; p--)
        if (req[o][p]) grant_in[o] = PW'(p);
      if (|req_hi[o])
        for (int p = NPORTS-1; p >= 0; p--)
          if (req_hi[o][p]) grant_in[o] = PW'(p);
    end
  end

  // Connection seen this cycle: the locked owner, or a fresh grant.
  logic [NPORTS-1:0] conn;
  logic [PW-1:0]     src [NPORTS];

  always_comb begin
    pop = '0;
    for (int o = 0; o < NPORTS; o++) begin
      conn[o]      = locked[o] || grant_ok[o];
      src[o]       = locked[o] ? owner[o] : grant_in[o];
      out_flit[o]  = '0;
      out_valid[o] = 1'b0;
      for (int p = 0; p < NPORTS; p++) begin
        if (src[o] == PW'(p)) begin
          out_flit[o]  = front[p];
          out_valid[o] = conn[o] && fvalid[p];
          if (conn[o] && fvalid[p] && out_ready[o]) pop[p] = 1'b1;
        end
      end
    end
  end

  logic [NPORTS-1:0] last;   // the flit leaving on an output ends its packet
  always_comb begin
    for (int o = 0; o < NPORTS; o++)
      last[o] = (out_flit[o].kind == FL_TAIL) || (out_flit[o].kind == FL_SINGLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= '0;
      for (int o = 0; o < NPORTS; o++) begin
        owner[o] <= '0;
        rr[o]    <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (conn[o]) begin
          if (out_valid[o] && out_ready[o] && last[o]) begin
            locked[o] <= 1'b0;
          end else begin
            locked[o] <= 1'b1;
            owner[o]  <= src[o];
          end
          if (!locked[o])
            rr[o] <= (grant_in[o] == PW'(NPORTS-1)) ? '0 : grant_in[o] + 1'b1;
        end
      end
    end
  end

  // A body or tail flit must never reach the front of a FIFO whose input has no
  // output locked to it: packets must start with a head flit.
  for (genvar p = 0; p < NPORTS; p++) begin : g_chk
    logic owned;
    always_comb begin
      owned = 1'b0;
      for (int o = 0; o < NPORTS; o++)
        if (locked[o] && owner[o] == PW'(p)) owned = 1'b1;
    end
    a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
      (fvalid[p] && !is_head[p]) |-> owned)
      else $error("router (%0d,%0d): packet on port %0d lacks a head flit", MY_X, MY_Y, p);
  end

endmodule
