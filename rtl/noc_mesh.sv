// Message network of one cluster: a mesh of wormhole routers.
//
// Each of the NX*NY processing elements of the cluster owns one router; node n
// sits at x = n % NX, y = n / NX and reaches its router through the local
// port. Routers are joined to their east/west and north/south neighbours by a
// pair of opposite links. A message is a packet of flits whose head flit
// carries the destination (x, y); dimension-order routing delivers it to the
// local output of the destination router.
//
// The router ports on the outer edge of the mesh, drawn in the paper's figure as
// links leaving the cluster, are tied off here: their inputs never carry a flit
// and their outputs are always ready. XY routing inside the mesh never sends a
// packet to them.
//
// Interface: per node, flit + valid/ready into the network (inj_*) and out of it
// (ej_*). Timing: one cycle per router on an idle path, so a packet's head
// reaches the destination's ejection port |dx|+|dy|+1 cycles after injection.
//
// The 4x2 arrangement of eight routers follows the paper's cluster figure; the
// link protocol and routing are this design's choices (see noc_router).
module noc_mesh
  import mpsoc_pkg::*;
#(
  parameter int unsigned NX    = 4,
  parameter int unsigned NY    = 2,
  parameter int unsigned DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  flit_t                inj_flit  [NX*NY],
  input  logic [NX*NY-1:0]     inj_valid,
  output logic [NX*NY-1:0]     inj_ready,
  output flit_t                ej_flit   [NX*NY],
  output logic [NX*NY-1:0]     ej_valid,
  input  logic [NX*NY-1:0]     ej_ready
);

  localparam int unsigned N = NX * NY;

  flit_t             r_in_flit  [N][NPORTS];
  logic [NPORTS-1:0] r_in_valid [N];
  logic [NPORTS-1:0] r_in_ready [N];
  flit_t             r_out_flit [N][NPORTS];
  logic [NPORTS-1:0] r_out_valid[N];
  logic [NPORTS-1:0] r_out_ready[N];

  for (genvar n = 0; n < N; n++) begin : g_node
    localparam int unsigned X = n % NX;
    localparam int unsigned Y = n / NX;

    noc_router #(.MY_X(X), .MY_Y(Y), .DEPTH(DEPTH)) u_router (
      .clk, .rst_n,
      .in_flit  (r_in_flit[n]),
      .in_valid (r_in_valid[n]),
      .in_ready (r_in_ready[n]),
      .out_flit (r_out_flit[n]),
      .out_valid(r_out_valid[n]),
      .out_ready(r_out_ready[n])
    );

    // Local port
    assign r_in_flit[n][P_LOCAL]   = inj_flit[n];
    assign r_in_valid[n][P_LOCAL]  = inj_valid[n];
    assign inj_ready[n]            = r_in_ready[n][P_LOCAL];
    assign ej_flit[n]              = r_out_flit[n][P_LOCAL];
    assign ej_valid[n]             = r_out_valid[n][P_LOCAL];
    assign r_out_ready[n][P_LOCAL] = ej_ready[n];

    // East input comes from the east neighbour's west output, and so on.
    if (X + 1 < NX) begin : g_east
      assign r_in_flit[n][P_EAST]   = r_out_flit[n+1][P_WEST];
      assign r_in_valid[n][P_EAST]  = r_out_valid[n+1][P_WEST];
      assign r_out_ready[n][P_EAST] = r_in_ready[n+1][P_WEST];
    end else begin : g_east_edge
      assign r_in_flit[n][P_EAST]   = '0;
      assign r_in_valid[n][P_EAST]  = 1'b0;
      assign r_out_ready[n][P_EAST] = 1'b1;
    end
    if (X > 0) begin : g_west
      assign r_in_flit[n][P_WEST]   = r_out_flit[n-1][P_EAST];
      assign r_in_valid[n][P_WEST]  = r_out_valid[n-1][P_EAST];
      assign r_out_ready[n][P_WEST] = r_in_ready[n-1][P_EAST];
    end else begin : g_west_edge
      assign r_in_flit[n][P_WEST]   = '0;
      assign r_in_valid[n][P_WEST]  = 1'b0;
      assign r_out_ready[n][P_WEST] = 1'b1;
    end
    if (Y + 1 < NY) begin : g_north
      assign r_in_flit[n][P_NORTH]   = r_out_flit[n+NX][P_SOUTH];
      assign r_in_valid[n][P_NORTH]  = r_out_valid[n+NX][P_SOUTH];
      assign r_out_ready[n][P_NORTH] = r_in_ready[n+NX][P_SOUTH];
    end else begin : g_north_edge
      assign r_in_flit[n][P_NORTH]   = '0;
      assign r_in_valid[n][P_NORTH]  = 1'b0;
      assign r_out_ready[n][P_NORTH] = 1'b1;
    end
    if (Y > 0) begin : g_south
      assign r_in_flit[n][P_SOUTH]   = r_out_flit[n-NX][P_NORTH];
      assign r_in_valid[n][P_SOUTH]  = r_out_valid[n-NX][P_NORTH];
      assign r_out_ready[n][P_SOUTH] = r_in_ready[n-NX][P_NORTH];
    end else begin : g_south_edge
      assign r_in_flit[n][P_SOUTH]   = '0;
      assign r_in_valid[n][P_SOUTH]  = 1'b0;
      assign r_out_ready[n][P_SOUTH] = 1'b1;
    end
  end

endmodule
