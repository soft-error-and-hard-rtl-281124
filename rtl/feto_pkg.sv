// feto_pkg: types, constants and pure functions shared by the 3D-FETO router
// and network.
//
// Flit format (44 bits, sizes as in the evaluated configuration):
//   [43:32] parity  - 12 check bits: two SEC-DED codes, one per 16-bit half
//   [31:18] header  - 14 bits: flit type, destination z/y/x, next-port
//   [17:0]  payload - 18 bits
// Every flit carries its own header, so routers switch flits individually.
// The parity split (2 x Hamming(22,16) SEC-DED) and the header field order are
// this design's choice; only the field sizes come from the original design.
//
// Port numbering (also used for the 3-bit next-port field): 0 local,
// 1 north (+y), 2 east (+x), 3 south (-y), 4 west (-x), 5 up (+z), 6 down (-z).
//
// The routing helpers implement the selection step of Look-Ahead
// Fault-Tolerant routing (LAFT): minimal directions first, then the largest
// next-hop path diversity, then the lowest congestion; a non-minimal healthy
// direction when no minimal one is left.
package feto_pkg;

  localparam int FLIT_W   = 44;
  localparam int DATA_W   = 32;
  localparam int HDR_W    = 14;
  localparam int PAY_W    = 18;
  localparam int PAR_W    = 12;
  localparam int NPORTS   = 7;
  localparam int COORD_W  = 3;
  localparam int SLOT_W   = 2;   // enough for the 4-slot input buffer

  // Two data bits of the same 16-bit half: flipping both gives an error the
  // SEC-DED decoder detects but cannot correct. Used to model physical defects.
  localparam logic [FLIT_W-1:0] DEFECT_MASK = 44'h3;

  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4,
    P_UP    = 3'd5,
    P_DOWN  = 3'd6
  } port_e;

  typedef enum logic [1:0] {
    FT_HEAD = 2'd0,
    FT_BODY = 2'd1,
    FT_TAIL = 2'd2,
    FT_SINGLE = 2'd3
  } ftype_e;

  typedef struct packed {
    logic [COORD_W-1:0] z;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  typedef struct packed {
    ftype_e       ftype;
    coord_t       dest;
    logic [2:0]   next_port;
  } header_t;

  typedef struct packed {
    logic [PAR_W-1:0] parity;
    header_t          hdr;
    logic [PAY_W-1:0] payload;
  } flit_t;

  // Status a router shows its neighbours: which of its output links are
  // declared faulty and which of its output registers are occupied.
  typedef struct packed {
    logic [NPORTS-1:0] link_fault;
    logic [NPORTS-1:0] congested;
  } node_status_t;

  // Where a flit sat in the router before it was sent: input port and slot.
  typedef struct packed {
    logic [2:0]        port;
    logic [SLOT_W-1:0] slot;
  } buf_pos_t;

  typedef enum logic [1:0] {
    ECC_OK        = 2'd0,
    ECC_CORRECTED = 2'd1,
    ECC_ARQ       = 2'd2
  } ecc_status_e;

  // ---------------------------------------------------------------- ECC --
  // Hamming(21,16) code position of data bit k: the positions 1..21 that
  // are not powers of two (1, 2, 4, 8, 16 hold the checks).
  localparam int unsigned HAM_POS [16] = '{3, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15,
                                           17, 18, 19, 20, 21};

  function automatic int unsigned ham_pos(int unsigned k);
    return HAM_POS[k];
  endfunction

  // Five Hamming checks of a 16-bit half.
  function automatic logic [4:0] ham_checks(logic [15:0] d);
    logic [4:0] c;
    c = '0;
    for (int unsigned k = 0; k < 16; k++)
      for (int unsigned b = 0; b < 5; b++)
        if (((ham_pos(k) >> b) & 1) != 0) c[b] ^= d[k];
    return c;
  endfunction

  // Six SEC-DED check bits of a half: {overall parity, Hamming checks}.
  function automatic logic [5:0] secded_checks(logic [15:0] d);
    logic [4:0] c;
    c = ham_checks(d);
    return {^{d, c}, c};
  endfunction

  // Twelve parity bits of the 32 data bits. The code is linear, so
  // ecc_parity(a ^ b) == ecc_parity(a) ^ ecc_parity(b).
  function automatic logic [PAR_W-1:0] ecc_parity(logic [DATA_W-1:0] d);
    return {secded_checks(d[31:16]), secded_checks(d[15:0])};
  endfunction

  // ------------------------------------------------------------ routing --
  function automatic port_e opposite(port_e p);
    case (p)
      P_NORTH: return P_SOUTH;
      P_SOUTH: return P_NORTH;
      P_EAST:  return P_WEST;
      P_WEST:  return P_EAST;
      P_UP:    return P_DOWN;
      P_DOWN:  return P_UP;
      default: return P_LOCAL;
    endcase
  endfunction

  // Node reached by leaving node c through port p.
  function automatic coord_t step(coord_t c, port_e p);
    coord_t n;
    n = c;
    case (p)
      P_NORTH: n.y = c.y + 1'b1;
      P_SOUTH: n.y = c.y - 1'b1;
      P_EAST:  n.x = c.x + 1'b1;
      P_WEST:  n.x = c.x - 1'b1;
      P_UP:    n.z = c.z + 1'b1;
      P_DOWN:  n.z = c.z - 1'b1;
      default: n = c;
    endcase
    return n;
  endfunction

  // Minimal directions from n towards d (at most one per dimension).
  function automatic logic [NPORTS-1:0] min_dirs(coord_t n, coord_t d);
    logic [NPORTS-1:0] m;
    m = '0;
    m[P_EAST]  = d.x > n.x;
    m[P_WEST]  = d.x < n.x;
    m[P_NORTH] = d.y > n.y;
    m[P_SOUTH] = d.y < n.y;
    m[P_UP]    = d.z > n.z;
    m[P_DOWN]  = d.z < n.z;
    return m;
  endfunction

  // Directions that stay inside a mesh of size dims (each field = count).
  function automatic logic [NPORTS-1:0] in_mesh(coord_t n, coord_t dims);
    logic [NPORTS-1:0] m;
    m = '0;
    m[P_EAST]  = 32'(n.x) + 1 < 32'(dims.x);
    m[P_WEST]  = n.x != 0;
    m[P_NORTH] = 32'(n.y) + 1 < 32'(dims.y);
    m[P_SOUTH] = n.y != 0;
    m[P_UP]    = 32'(n.z) + 1 < 32'(dims.z);
    m[P_DOWN]  = n.z != 0;
    return m;
  endfunction

  // Path diversity of leaving n through p: how many minimal directions the
  // node after that hop still has towards d.
  function automatic logic [1:0] path_div(coord_t n, coord_t d, port_e p);
    logic [NPORTS-1:0] m;
    m = min_dirs(step(n, p), d);
    return 2'(32'($countones(m)));
  endfunction

  // LAFT selection at node n for destination d, given n's faulty and
  // congested output links and the port pointing back where the flit came
  // from. Returns the output port the flit must take at node n.
  function automatic port_e laft_select(coord_t n, coord_t d, coord_t dims,
                                        logic [NPORTS-1:0] fault,
                                        logic [NPORTS-1:0] cong,
                                        port_e back);
    logic [NPORTS-1:0] cand;
    logic [NPORTS-1:0] nonmin;
    logic [1:0]        div [NPORTS];
    logic [1:0]        best_div;
    logic              all_equal;
    logic              first_seen;
    logic [1:0]        first_div;
    logic              found;
    port_e             sel;
    if (n == d) return P_LOCAL;
    cand = min_dirs(n, d) & ~fault;
    sel = P_LOCAL;
    found = 1'b0;
    if ($countones(cand) > 1) begin
      all_equal = 1'b1;
      first_seen = 1'b0;
      first_div = '0;
      best_div = '0;
      for (int p = 1; p < NPORTS; p++) begin
        div[p] = path_div(n, d, port_e'(p));
        if (cand[p]) begin
          if (!first_seen) begin
            first_seen = 1'b1;
            first_div = div[p];
          end else if (div[p] != first_div) begin
            all_equal = 1'b0;
          end
          if (div[p] > best_div) best_div = div[p];
        end
      end
      // Equal diversity: least congested candidate (lowest port on ties).
      // Otherwise: largest diversity, congestion breaking ties.
      for (int p = 1; p < NPORTS; p++)
        if (!found && cand[p] && !cong[p] && (all_equal || div[p] == best_div)) begin
          sel = port_e'(p);
          found = 1'b1;
        end
      for (int p = 1; p < NPORTS; p++)
        if (!found && cand[p] && (all_equal || div[p] == best_div)) begin
          sel = port_e'(p);
          found = 1'b1;
        end
    end else if ($countones(cand) == 1) begin
      for (int p = 1; p < NPORTS; p++)
        if (cand[p]) sel = port_e'(p);
    end else begin
      // Non-minimal: any healthy in-mesh direction except going back,
      // uncongested first; going back only as the last resort.
      nonmin = in_mesh(n, dims) & ~fault;
      nonmin[P_LOCAL] = 1'b0;
      if (back != P_LOCAL && $countones(nonmin) > 1) nonmin[back] = 1'b0;
      for (int p = 1; p < NPORTS; p++)
        if (!found && nonmin[p] && !cong[p]) begin
          sel = port_e'(p);
          found = 1'b1;
        end
      for (int p = 1; p < NPORTS; p++)
        if (!found && nonmin[p]) begin
          sel = port_e'(p);
          found = 1'b1;
        end
    end
    return sel;
  endfunction

endpackage
