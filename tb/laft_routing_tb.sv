// laft_routing_tb: random positions, destinations, fault and congestion
// maps in a 4x4x4 mesh; the unit's choice is compared with a reference
// written here with signed offsets: minimal healthy directions first, then
// largest diversity (number of non-zero offsets left after the hop), then
// no congestion, then lowest port; a healthy in-mesh direction other than
// back when no minimal one is healthy. Also checks the local re-route when
// this router's own link is faulty.
module laft_routing_tb;
  import feto_pkg::*;
  coord_t cur, dims;
  port_e inp, outp, nnp;
  header_t hdr;
  logic [6:0] ofault, ocong;
  node_status_t nbr [7];
  logic rer;
  int checks = 0, failures = 0;
  int minimal_cnt = 0, nonmin_cnt = 0, reroute_cnt = 0, divsel_cnt = 0, congsel_cnt = 0;

  laft_routing dut (.cur_i(cur), .dims_i(dims), .in_port_i(inp), .hdr_i(hdr),
    .own_fault_i(ofault), .own_cong_i(ocong), .nbr_status_i(nbr),
    .out_port_o(outp), .new_next_port_o(nnp), .rerouted_o(rer));

  // offsets of each port: {dx, dy, dz}
  function automatic void delta(int p, output int dx, output int dy, output int dz);
    dx = 0; dy = 0; dz = 0;
    case (p)
      1: dy = 1; 2: dx = 1; 3: dy = -1; 4: dx = -1; 5: dz = 1; 6: dz = -1;
      default: ;
    endcase
  endfunction

  function automatic int nz(int a, int b, int c);
    return (a != 0) + (b != 0) + (c != 0);
  endfunction

  // reference selection at node (x,y,z) for destination (X,Y,Z)
  function automatic int ref_sel(int x, int y, int z, int X, int Y, int Z,
                                 logic [6:0] f, logic [6:0] c, int back, output int kind);
    int cand[$];
    int divs[$];
    int best, bd, dx, dy, dz, ex, ey, ez;
    bit alleq;
    kind = 0;
    if (x == X && y == Y && z == Z) return 0;
    ex = X - x; ey = Y - y; ez = Z - z;
    for (int p = 1; p <= 6; p++) begin
      delta(p, dx, dy, dz);
      if (((dx != 0 && dx * ex > 0) || (dy != 0 && dy * ey > 0) || (dz != 0 && dz * ez > 0)) && !f[p]) begin
        cand.push_back(p);
        divs.push_back(nz(ex - dx, ey - dy, ez - dz));
      end
    end
    if (cand.size() == 1) return cand[0];
    if (cand.size() > 1) begin
      alleq = 1; bd = -1;
      foreach (divs[i]) begin
        if (divs[i] != divs[0]) alleq = 0;
        if (divs[i] > bd) bd = divs[i];
      end
      kind = alleq ? 2 : 1;
      best = -1;
      foreach (cand[i]) if (best < 0 && !c[cand[i]] && (alleq || divs[i] == bd)) best = cand[i];
      foreach (cand[i]) if (best < 0 && (alleq || divs[i] == bd)) best = cand[i];
      return best;
    end
    kind = 3;
    begin
      int ok[$];
      for (int p = 1; p <= 6; p++) begin
        delta(p, dx, dy, dz);
        if (!f[p] && x + dx >= 0 && x + dx < 4 && y + dy >= 0 && y + dy < 4 && z + dz >= 0 && z + dz < 4)
          ok.push_back(p);
      end
      if (ok.size() > 1) foreach (ok[i]) if (ok[i] == back) ok.delete(i);
      best = -1;
      foreach (ok[i]) if (best < 0 && !c[ok[i]]) best = ok[i];
      foreach (ok[i]) if (best < 0) best = ok[i];
      return best < 0 ? 0 : best;
    end
  endfunction

  function automatic int opp(int p);
    return p == 0 ? 0 : (p <= 4 ? ((p + 1) % 4) + 1 : (p == 5 ? 6 : 5));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dims = '{z: 3'd4, y: 3'd4, x: 3'd4};
    for (int i = 0; i < 20000; i++) begin
      int np, dx, dy, dz, nx, ny, nz_, expo, expn, kind, k2;
      cur = '{z: 3'($urandom_range(3)), y: 3'($urandom_range(3)), x: 3'($urandom_range(3))};
      hdr.dest = '{z: 3'($urandom_range(3)), y: 3'($urandom_range(3)), x: 3'($urandom_range(3))};
      hdr.ftype = FT_BODY;
      // a next-port that stays inside the mesh
      do begin
        np = int'($urandom_range(6));
        delta(np, dx, dy, dz);
      end while (int'(cur.x) + dx < 0 || int'(cur.x) + dx > 3 || int'(cur.y) + dy < 0 ||
                 int'(cur.y) + dy > 3 || int'(cur.z) + dz < 0 || int'(cur.z) + dz > 3);
      hdr.next_port = 3'(np);
      inp = port_e'($urandom_range(6));
      ofault = (i % 5 == 0) ? 7'($urandom) & 7'h7e : '0;
      ocong  = 7'($urandom);
      for (int p = 0; p < 7; p++) begin
        nbr[p].link_fault = (i % 3 == 0) ? (7'($urandom) & 7'($urandom) & 7'h7e) : '0;
        nbr[p].congested  = 7'($urandom);
      end
      #1;
      expo = np;
      if (np != 0 && ofault[np]) begin
        expo = ref_sel(cur.x, cur.y, cur.z, hdr.dest.x, hdr.dest.y, hdr.dest.z, ofault, ocong, int'(inp), k2);
        reroute_cnt++;
      end
      delta(expo, dx, dy, dz);
      nx = int'(cur.x) + dx; ny = int'(cur.y) + dy; nz_ = int'(cur.z) + dz;
      if (expo == 0) expn = 0;
      else expn = ref_sel(nx, ny, nz_, hdr.dest.x, hdr.dest.y, hdr.dest.z,
                          nbr[expo].link_fault, nbr[expo].congested, opp(expo), kind);
      if (expo != 0) begin
        if (kind == 3) nonmin_cnt++; else minimal_cnt++;
        if (kind == 1) divsel_cnt++;
        if (kind == 2) congsel_cnt++;
      end
      checks++;
      if (int'(outp) != expo || int'(nnp) != expn || rer != (np != 0 && ofault[np])) begin
        failures++;
        if (failures < 10)
          $display("FAIL cur=%p dest=%p np=%0d out=%0d/%0d nnp=%0d/%0d", cur, hdr.dest, np, outp, expo, nnp, expn);
      end
    end
    $display("minimal=%0d nonminimal=%0d by-diversity=%0d by-congestion=%0d rerouted=%0d",
             minimal_cnt, nonmin_cnt, divsel_cnt, congsel_cnt, reroute_cnt);
    checks++;
    if (nonmin_cnt == 0 || divsel_cnt == 0 || congsel_cnt == 0 || reroute_cnt == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
