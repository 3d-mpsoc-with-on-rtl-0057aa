// One cluster of the 3D MPSoC: eight processing elements with two separate
// communication systems.
//
// Memory system: each core has a private L1 instruction cache and a private L1
// data cache. All sixteen L1 caches are masters of one CCI-like coherent
// interconnect, which keeps them coherent (MOESI, by snooping) and connects them
// to one shared L2 cache. In the 3D stack the L2 lives in the tier below the
// cores and the interconnect reaches it through TSVs; in RTL that link is just
// the wires between cci_interconnect and l2_cache. The L2 has one port to main
// memory, brought out of the cluster. All cores see one global, uniformly
// accessed (UMA) address space.
//
// Message system: a 4x2 mesh NoC with one router per core carries messages
// between cores, so message traffic never competes with memory traffic.
//
// The cores themselves are not part of this RTL: each core's instruction fetch
// port (i*), load/store port (d*) and NoC injection/ejection port are ports of
// the cluster. Core c's data cache is interconnect master 2c, its instruction
// cache master 2c+1; core c's router sits at x = c % NX, y = c / NX.
//
// Timing: an L1 hit answers two cycles after the request is accepted; an L1 miss
// that hits in L2 takes about a dozen cycles; see the module headers below.
//
// The eight-core cluster, the separation of the NoC from the coherent memory
// interconnect, the cache sizes and the single memory interface follow the
// paper; the port protocols are this design's choices.
module mpsoc_cluster
  import mpsoc_pkg::*;
#(
  parameter int unsigned NX         = 4,
  parameter int unsigned NY         = 2,
  parameter int unsigned L1_BYTES   = 32768,
  parameter int unsigned L1_WAYS    = 2,
  parameter int unsigned L2_BYTES   = 1048576,
  parameter int unsigned L2_WAYS    = 16,
  parameter int unsigned NOC_DEPTH  = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // instruction fetch ports, one per core
  input  logic [NX*NY-1:0]       ireq_valid,
  output logic [NX*NY-1:0]       ireq_ready,
  input  logic [ADDR_W-1:0]      ireq_addr  [NX*NY],
  output logic [NX*NY-1:0]       iresp_valid,
  output logic [WORD_W-1:0]      iresp_rdata[NX*NY],
  // load/store ports, one per core
  input  logic [NX*NY-1:0]       dreq_valid,
  output logic [NX*NY-1:0]       dreq_ready,
  input  logic [NX*NY-1:0]       dreq_we,
  input  logic [ADDR_W-1:0]      dreq_addr  [NX*NY],
  input  logic [WORD_W-1:0]      dreq_wdata [NX*NY],
  output logic [NX*NY-1:0]       dresp_valid,
  output logic [WORD_W-1:0]      dresp_rdata[NX*NY],
  // message NoC ports, one per core
  input  flit_t                  inj_flit   [NX*NY],
  input  logic [NX*NY-1:0]       inj_valid,
  output logic [NX*NY-1:0]       inj_ready,
  output flit_t                  ej_flit    [NX*NY],
  output logic [NX*NY-1:0]       ej_valid,
  input  logic [NX*NY-1:0]       ej_ready,
  // main memory port of the L2
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_we,
  output line_addr_t             mem_req_addr,
  output logic                   mem_wvalid,
  input  logic                   mem_wready,
  output beat_t                  mem_wdata,
  input  logic                   mem_rvalid,
  input  beat_t                  mem_rdata
);

  localparam int unsigned NC = NX * NY;
  localparam int unsigned NM = 2 * NC;

  // Interconnect master side
  logic [NM-1:0]         bus_req, bus_gnt, cmd_valid, rd_valid, done;
  cci_cmd_t              cmd      [NM];
  line_addr_t            cmd_addr [NM];
  beat_t                 wb_data  [NM];
  logic [BEAT_IDX_W-1:0] wb_beat;
  beat_t                 rd_data;
  logic                  done_shared;
  // snoop layer
  logic [NM-1:0]         snp_valid, snp_resp_valid, snp_hit, snp_owner;
  line_addr_t            snp_addr;
  logic                  snp_inv;
  logic [BEAT_IDX_W-1:0] snp_beat;
  beat_t                 snp_data [NM];
  // interconnect to L2 (through the TSV tier link)
  logic       l2_req_valid, l2_req_ready, l2_req_we;
  line_addr_t l2_req_addr;
  logic       l2_wvalid, l2_wready, l2_rvalid, l2_done;
  beat_t      l2_wdata, l2_rdata;

  for (genvar c = 0; c < NC; c++) begin : g_core
    localparam int unsigned MD = 2 * c;      // data cache master
    localparam int unsigned MI = 2 * c + 1;  // instruction cache master

    l1_cache #(.SIZE_BYTES(L1_BYTES), .WAYS(L1_WAYS)) u_l1d (
      .clk, .rst_n,
      .req_valid (dreq_valid[c]),  .req_ready (dreq_ready[c]),
      .req_we    (dreq_we[c]),     .req_addr  (dreq_addr[c]),
      .req_wdata (dreq_wdata[c]),
      .resp_valid(dresp_valid[c]), .resp_rdata(dresp_rdata[c]),
      .bus_req   (bus_req[MD]),    .bus_gnt   (bus_gnt[MD]),
      .cmd_valid (cmd_valid[MD]),  .cmd       (cmd[MD]),
      .cmd_addr  (cmd_addr[MD]),   .wb_beat   (wb_beat),
      .wb_data   (wb_data[MD]),    .rd_valid  (rd_valid[MD]),
      .rd_data   (rd_data),        .done      (done[MD]),
      .done_shared(done_shared),
      .snp_valid (snp_valid[MD]),  .snp_addr  (snp_addr),
      .snp_inv   (snp_inv),        .snp_resp_valid(snp_resp_valid[MD]),
      .snp_hit   (snp_hit[MD]),    .snp_owner (snp_owner[MD]),
      .snp_beat  (snp_beat),       .snp_data  (snp_data[MD])
    );

    l1_cache #(.SIZE_BYTES(L1_BYTES), .WAYS(L1_WAYS)) u_l1i (
      .clk, .rst_n,
      .req_valid (ireq_valid[c]),  .req_ready (ireq_ready[c]),
      .req_we    (1'b0),           .req_addr  (ireq_addr[c]),
      .req_wdata ('0),
      .resp_valid(iresp_valid[c]), .resp_rdata(iresp_rdata[c]),
      .bus_req   (bus_req[MI]),    .bus_gnt   (bus_gnt[MI]),
      .cmd_valid (cmd_valid[MI]),  .cmd       (cmd[MI]),
      .cmd_addr  (cmd_addr[MI]),   .wb_beat   (wb_beat),
      .wb_data   (wb_data[MI]),    .rd_valid  (rd_valid[MI]),
      .rd_data   (rd_data),        .done      (done[MI]),
      .done_shared(done_shared),
      .snp_valid (snp_valid[MI]),  .snp_addr  (snp_addr),
      .snp_inv   (snp_inv),        .snp_resp_valid(snp_resp_valid[MI]),
      .snp_hit   (snp_hit[MI]),    .snp_owner (snp_owner[MI]),
      .snp_beat  (snp_beat),       .snp_data  (snp_data[MI])
    );
  end

  cci_interconnect #(.NM(NM)) u_cci (
    .clk, .rst_n,
    .m_bus_req    (bus_req),
    .m_bus_gnt    (bus_gnt),
    .m_cmd_valid  (cmd_valid),
    .m_cmd        (cmd),
    .m_cmd_addr   (cmd_addr),
    .m_wb_beat    (wb_beat),
    .m_wb_data    (wb_data),
    .m_rd_valid   (rd_valid),
    .m_rd_data    (rd_data),
    .m_done       (done),
    .m_done_shared(done_shared),
    .s_valid      (snp_valid),
    .s_addr       (snp_addr),
    .s_inv        (snp_inv),
    .s_resp_valid (snp_resp_valid),
    .s_hit        (snp_hit),
    .s_owner      (snp_owner),
    .s_beat       (snp_beat),
    .s_data       (snp_data),
    .l2_req_valid, .l2_req_ready, .l2_req_we, .l2_req_addr,
    .l2_wvalid, .l2_wready, .l2_wdata,
    .l2_rvalid, .l2_rdata, .l2_done
  );

  l2_cache #(.SIZE_BYTES(L2_BYTES), .WAYS(L2_WAYS)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready),
    .req_we   (l2_req_we),    .req_addr (l2_req_addr),
    .wvalid   (l2_wvalid),    .wready   (l2_wready),  .wdata(l2_wdata),
    .rvalid   (l2_rvalid),    .rdata    (l2_rdata),   .done (l2_done),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_wvalid, .mem_wready, .mem_wdata, .mem_rvalid, .mem_rdata
  );

  noc_mesh #(.NX(NX), .NY(NY), .DEPTH(NOC_DEPTH)) u_noc (
    .clk, .rst_n,
    .inj_flit, .inj_valid, .inj_ready,
    .ej_flit,  .ej_valid,  .ej_ready
  );

endmodule
