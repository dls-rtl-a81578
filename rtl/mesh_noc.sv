// mesh_noc: the MESH_X x MESH_Y 2-D mesh network-on-chip (4x4 in the
// evaluated 16-core system). It places one mesh_router per tile and joins
// neighbours with mesh_link pairs of LINK_LAT cycles (2 cycles of wire
// delay). Node n sits at x = n % MESH_X, y = n / MESH_X; north is y-1.
// Each node's local port is brought out: loc_in_* injects flits (the
// sender must hold a credit per flit, DEPTH credits after reset, one
// returned on loc_in_credit for each flit that leaves the router's local
// buffer) and loc_out_* ejects flits (the receiver returns one credit per
// flit on loc_out_credit and must be able to buffer DEPTH flits).
// Zero-load latency: 2 cycles per router plus LINK_LAT per hop.
// Edge ports of the mesh are unconnected (never driven, credits held at 0).
module mesh_noc
  import dls_pkg::*;
#(
  parameter int unsigned NX       = MESH_X,
  parameter int unsigned NY       = MESH_Y,
  parameter int unsigned DEPTH    = 8,
  parameter int unsigned LINK_LAT = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  loc_in_valid  [NX*NY],
  input  flit_t loc_in_flit   [NX*NY],
  output logic  loc_in_credit [NX*NY],
  output logic  loc_out_valid [NX*NY],
  output flit_t loc_out_flit  [NX*NY],
  input  logic  loc_out_credit[NX*NY]
);
  localparam int unsigned N = NX*NY;

  logic [4:0] r_in_valid  [N];
  flit_t      r_in_flit   [N][5];
  logic [4:0] r_in_credit [N];
  logic [4:0] r_out_valid [N];
  flit_t      r_out_flit  [N][5];
  logic [4:0] r_out_credit[N];

  for (genvar n = 0; n < N; n++) begin : g_node
    localparam int unsigned X = n % NX;
    localparam int unsigned Y = n / NX;

    mesh_router #(.MY_X(X), .MY_Y(Y), .DEPTH(DEPTH)) u_router (
      .clk, .rst_n,
      .in_valid  (r_in_valid[n]),
      .in_flit   (r_in_flit[n]),
      .in_credit (r_in_credit[n]),
      .out_valid (r_out_valid[n]),
      .out_flit  (r_out_flit[n]),
      .out_credit(r_out_credit[n])
    );

    // local port
    assign r_in_valid[n][0]   = loc_in_valid[n];
    assign r_in_flit[n][0]    = loc_in_flit[n];
    assign loc_in_credit[n]   = r_in_credit[n][0];
    assign loc_out_valid[n]   = r_out_valid[n][0];
    assign loc_out_flit[n]    = r_out_flit[n][0];
    assign r_out_credit[n][0] = loc_out_credit[n];

    // outgoing links: this node's output port p feeds the neighbour's
    // opposite input port; the neighbour's credit for that input returns.
    for (genvar p = 1; p < 5; p++) begin : g_port
      localparam bit HAS = (p == 1) ? (Y > 0) : (p == 2) ? (X < NX-1) :
                           (p == 3) ? (Y < NY-1) : (X > 0);
      localparam int unsigned NB = (p == 1) ? n - NX : (p == 2) ? n + 1 :
                                   (p == 3) ? n + NX : n - 1;
      localparam int unsigned OPP = (p == 1) ? 3 : (p == 2) ? 4 : (p == 3) ? 1 : 2;
      if (HAS) begin : g_link
        mesh_link #(.LAT(LINK_LAT)) u_link (
          .clk, .rst_n,
          .src_valid (r_out_valid[n][p]),
          .src_flit  (r_out_flit[n][p]),
          .src_credit(r_out_credit[n][p]),
          .dst_valid (r_in_valid[NB][OPP]),
          .dst_flit  (r_in_flit[NB][OPP]),
          .dst_credit(r_in_credit[NB][OPP])
        );
      end else begin : g_edge
        assign r_out_credit[n][p]     = 1'b0;
        // with no neighbour on side p, input p of this node is idle too
        assign r_in_valid[n][p] = 1'b0;
        assign r_in_flit[n][p]  = '0;
      end
    end
  end

endmodule
