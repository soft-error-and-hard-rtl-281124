// feto_noc: the 3D-FETO network, a MESH_X x MESH_Y x MESH_Z mesh of
// SHER-3DR routers.
//
// Router (x, y, z) has index n = (z*MESH_Y + y)*MESH_X + x. Its north, east,
// south, west, up and down ports connect to the routers at y+1, x+1, y-1,
// x-1, z+1 and z-1; the up/down links are the vertical (through-silicon)
// links between stacked layers and are plain wires here, like the planar
// ones. Ports on the mesh boundary are left unconnected (no traffic is ever
// routed there). Each router also receives the status (faulty links,
// congestion) of its six neighbours, which LAFT routing needs.
//
// The local port of each router is brought out (local_*): the computation
// tiles and their network interfaces are not part of this design. A tile
// injects ECC-encoded 44-bit flits whose next-port field names the output
// to take in the source router, and may answer delivered flits with an ARQ.
//
// Fault injection (for evaluation, not hardware of the original design):
// link_err_i[n][p] corrupts the link leaving router n through port p while
// it is set (bit 0: one flipped bit, corrected by ECC; bit 1: two flipped
// bits, refused with an ARQ). Holding it for one cycle models a soft error,
// holding it for good a broken link. buf_defect_i, xbar_defect_i and seu_i
// go to the routers (see sher3dr_router).
//
// Default size 4x4x4, the network used for the Transpose, Uniform and
// Hotspot evaluations of the original design.
module feto_noc
  import feto_pkg::*;
#(
  parameter int MESH_X  = 4,
  parameter int MESH_Y  = 4,
  parameter int MESH_Z  = 4,
  parameter int DEPTH   = 4,
  parameter int NBYPASS = 2,
  localparam int N      = MESH_X * MESH_Y * MESH_Z
) (
  input  logic              clk,
  input  logic              rst_n,
  // local ports (tile side)
  input  logic [N-1:0]      local_in_valid_i,
  input  flit_t             local_in_flit_i [N],
  output logic [N-1:0]      local_in_stop_o,
  output logic [N-1:0]      local_in_arq_o,
  output logic [N-1:0]      local_out_valid_o,
  output flit_t             local_out_flit_o [N],
  input  logic [N-1:0]      local_out_stop_i,
  input  logic [N-1:0]      local_out_arq_i,
  // fault injection
  input  logic [1:0]        link_err_i [N][NPORTS],
  input  logic [DEPTH-1:0]  buf_defect_i [N][NPORTS],
  input  logic [NPORTS-1:0] xbar_defect_i [N],
  input  logic [NPORTS:0]   seu_i [N],
  // observation
  output node_status_t      status_o [N],
  output logic [NPORTS-1:0] corrected_o [N],
  output logic [N-1:0]      ser_retry_o,
  output logic [N-1:0]      perm_ev_o,
  output logic [NPORTS-1:0] arq_ev_o [N],
  output logic [NPORTS-1:0] drop_o [N],
  output logic [NPORTS-1:0] rerouted_o [N],
  output logic [NPORTS-1:0] bypass_active_o [N],
  output logic [DEPTH-1:0]  slot_faulty_o [N][NPORTS]
);
  logic [NPORTS-1:0] in_valid  [N];
  flit_t             in_flit   [N][NPORTS];
  logic [NPORTS-1:0] in_stop   [N];
  logic [NPORTS-1:0] in_arq    [N];
  logic [NPORTS-1:0] out_valid [N];
  flit_t             out_flit  [N][NPORTS];
  logic [NPORTS-1:0] out_stop  [N];
  logic [NPORTS-1:0] out_arq   [N];
  node_status_t      nbr       [N][NPORTS];

  // neighbour index through port p, or -1 at the boundary
  function automatic int nbr_idx(int n, int p);
    int x, y, z;
    x = n % MESH_X;
    y = (n / MESH_X) % MESH_Y;
    z = n / (MESH_X * MESH_Y);
    case (p)
      1: y++;
      2: x++;
      3: y--;
      4: x--;
      5: z++;
      6: z--;
      default: return -1;
    endcase
    if (x < 0 || y < 0 || z < 0 || x >= MESH_X || y >= MESH_Y || z >= MESH_Z) return -1;
    return (z * MESH_Y + y) * MESH_X + x;
  endfunction

  function automatic int opp(int p);
    case (p)
      1: return 3;
      3: return 1;
      2: return 4;
      4: return 2;
      5: return 6;
      6: return 5;
      default: return 0;
    endcase
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_node
    // local port
    assign in_valid[n][0]       = local_in_valid_i[n];
    assign in_flit[n][0]        = local_in_flit_i[n];
    assign local_in_stop_o[n]   = in_stop[n][0];
    assign local_in_arq_o[n]    = in_arq[n][0];
    assign local_out_valid_o[n] = out_valid[n][0];
    assign local_out_flit_o[n]  = out_flit[n][0];
    assign out_stop[n][0]       = local_out_stop_i[n];
    assign out_arq[n][0]        = local_out_arq_i[n];
    assign nbr[n][0]            = '0;

    for (genvar p = 1; p < NPORTS; p++) begin : g_port
      localparam int M = nbr_idx(n, p);
      localparam int Q = opp(p);
      if (M >= 0) begin : g_link
        // link from neighbour M (its port Q) into this router's port p
        assign in_valid[n][p] = out_valid[M][Q];
        assign in_flit[n][p]  = flit_t'(out_flit[M][Q] ^
                                {{(FLIT_W-2){1'b0}}, link_err_i[M][Q][1],
                                 link_err_i[M][Q][0] | link_err_i[M][Q][1]});
        assign out_stop[n][p] = in_stop[M][Q];
        assign out_arq[n][p]  = in_arq[M][Q];
        assign nbr[n][p]      = status_o[M];
      end else begin : g_edge
        assign in_valid[n][p] = 1'b0;
        assign in_flit[n][p]  = '0;
        assign out_stop[n][p] = 1'b0;
        assign out_arq[n][p]  = 1'b0;
        assign nbr[n][p]      = '0;
      end
    end

    sher3dr_router #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .MESH_Z(MESH_Z),
      .DEPTH(DEPTH), .NBYPASS(NBYPASS)
    ) router (
      .clk, .rst_n,
      .pos_i('{z: COORD_W'(n / (MESH_X * MESH_Y)), y: COORD_W'((n / MESH_X) % MESH_Y),
               x: COORD_W'(n % MESH_X)}),
      .in_valid_i(in_valid[n]), .in_flit_i(in_flit[n]),
      .in_stop_o(in_stop[n]), .in_arq_o(in_arq[n]),
      .out_valid_o(out_valid[n]), .out_flit_o(out_flit[n]),
      .out_stop_i(out_stop[n]), .out_arq_i(out_arq[n]),
      .nbr_status_i(nbr[n]), .status_o(status_o[n]),
      .buf_defect_i(buf_defect_i[n]), .xbar_defect_i(xbar_defect_i[n]), .seu_i(seu_i[n]),
      .corrected_o(corrected_o[n]), .ser_retry_o(ser_retry_o[n]), .perm_ev_o(perm_ev_o[n]),
      .arq_ev_o(arq_ev_o[n]),
      .drop_o(drop_o[n]), .rerouted_o(rerouted_o[n]), .bypass_active_o(bypass_active_o[n]),
      .slot_faulty_o(slot_faulty_o[n]));
  end
endmodule
