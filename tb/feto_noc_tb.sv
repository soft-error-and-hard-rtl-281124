// feto_noc_tb: end-to-end run of the 3D-FETO network, here as a 2x2x2 mesh
// (the default is 4x4x4; the 2x2x2 mesh keeps build time short and still has
// every kind of link: x, y and vertical). Every node has a tile model that injects single flits to
// uniformly random destinations (the tile chooses the first next-port with
// the same LAFT selection the routers use) and checks what it receives:
// right destination, valid code, each flit once. The run goes through
// phases that make every fault-tolerance mechanism happen:
//   A  transient link errors (single-bit: ECC correction; double-bit: ARQ
//      and retransmission), upsets in the routing/allocation logic
//      (redundant computation and voting), corrupted injections refused
//      with an ARQ, and back-pressure from busy tiles;
//   B  a broken input-buffer slot (node 5, local input, slot 2): diagnosed
//      and avoided by the Random Access Buffer;
//   C  a broken crossbar channel (node 3, local output): diagnosed and
//      replaced by a bypass link (BLoD);
//   D  a broken router-to-router link (node 0 east, to node 1):
//      declared faulty and reported to the neighbours; flits from node 0 to
//      node 1 injected afterwards must detour and are counted on arrival.
//      Flits already committed to the link are re-routed inside node 0
//      (counted and reported, not required).
// Each mechanism is counted and must have happened; at the end, every flit
// injected was either delivered or dropped while a permanent fault was
// being diagnosed.
module feto_noc_tb;
  import feto_pkg::*;
  localparam int MX = 2, MY = 2, MZ = 2;
  localparam int N = MX * MY * MZ;
  localparam coord_t DIMS = '{z: 3'(MZ), y: 3'(MY), x: 3'(MX)};

  logic clk = 0, rst_n = 0;
  logic [N-1:0] li_valid, li_stop, li_arq, lo_valid, lo_stop, lo_arq;
  flit_t li_flit [N];
  flit_t lo_flit [N];
  logic [1:0] link_err [N][NPORTS];
  logic [3:0] buf_defect [N][NPORTS];
  logic [6:0] xbar_defect [N];
  logic [7:0] seu [N];
  node_status_t status [N];
  logic [6:0] corrected [N];
  logic [N-1:0] retry, perm;
  logic [6:0] arqev [N];
  logic [6:0] drop [N];
  logic [6:0] rerouted [N];
  logic [6:0] bact [N];
  logic [3:0] slot_faulty [N][NPORTS];
  int checks = 0, failures = 0;

  feto_noc #(.MESH_X(MX), .MESH_Y(MY), .MESH_Z(MZ)) dut (
    .clk, .rst_n,
    .local_in_valid_i(li_valid), .local_in_flit_i(li_flit), .local_in_stop_o(li_stop),
    .local_in_arq_o(li_arq), .local_out_valid_o(lo_valid), .local_out_flit_o(lo_flit),
    .local_out_stop_i(lo_stop), .local_out_arq_i(lo_arq),
    .link_err_i(link_err), .buf_defect_i(buf_defect), .xbar_defect_i(xbar_defect), .seu_i(seu),
    .status_o(status), .corrected_o(corrected), .ser_retry_o(retry), .perm_ev_o(perm),
    .arq_ev_o(arqev), .drop_o(drop), .rerouted_o(rerouted), .bypass_active_o(bact),
    .slot_faulty_o(slot_faulty));

  logic [N-1:0] dec_arq;
  for (genvar n = 0; n < N; n++) begin : g_dec
    ecc_decoder d (.flit_i(lo_flit[n]), .flit_o(), .status_o(), .corrected_o(), .arq_o(dec_arq[n]));
  end

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic coord_t coord_of(int n);
    return '{z: 3'(n / (MX * MY)), y: 3'((n / MX) % MY), x: 3'(n % MX)};
  endfunction

  // watchdog
  initial begin
    #(10 * 60000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit    pend [N];
  flit_t pflit [N];
  bit    pcorrupt [N];
  int    dest_of [int];      // id -> destination node, for flits in flight
  bit    around [int];       // flits 0 -> 1 sent after link 0-east was declared faulty
  int    next_id = 0, cycle = 0;
  int    inj_pct = 0, tr_link = 0, tr_seu = 0, in_err_pct = 0, stop_pct = 0;
  int    n_inj = 0, n_deliv = 0, n_drop = 0, n_corr = 0, n_arq = 0, n_retry = 0,
         n_perm = 0, n_reroute = 0, n_lo_arq = 0, n_li_arq = 0, n_stop = 0,
         n_tr_double = 0, n_tr_single = 0, n_around = 0;

  function automatic flit_t make_flit(int src, int id, int dst);
    header_t h;
    logic [17:0] pl;
    h.ftype = FT_SINGLE;
    h.dest = coord_of(dst);
    h.next_port = 3'(laft_select(coord_of(src), h.dest, DIMS, status[src].link_fault,
                                 status[src].congested, P_LOCAL));
    pl = {16'(id), 2'b00};
    return flit_t'({ecc_parity({h, pl}), h, pl});
  endfunction

  task automatic step_cycle();
    @(negedge clk);
    cycle++;
    for (int n = 0; n < N; n++) begin
      if (!pend[n] && $urandom_range(999) < inj_pct) begin
        int d;
        d = int'($urandom_range(N - 1));
        pend[n] = 1;
        pflit[n] = make_flit(n, next_id, d);
        pcorrupt[n] = $urandom_range(99) < in_err_pct;
        dest_of[next_id] = d;
        if (n == 0 && d == 1 && status[0].link_fault[P_EAST]) around[next_id] = 1;
        next_id++;
        n_inj++;
      end
      li_valid[n] = pend[n];
      li_flit[n] = pcorrupt[n] ? flit_t'(pflit[n] ^ DEFECT_MASK) : pflit[n];
      lo_stop[n] = $urandom_range(99) < stop_pct;
      for (int p = 0; p < NPORTS; p++) link_err[n][p] = '0;
      seu[n] = '0;
    end
    // transient link errors: one link at a time, never the same link twice
    // within a few cycles, so a retransmission is clean
    if (tr_link != 0 && cycle % 3 == 0) begin
      int n, p;
      n = int'($urandom_range(N - 1));
      p = int'($urandom_range(1, 6));
      link_err[n][p] = (cycle % 2 == 0) ? 2'b10 : 2'b01;
      if (cycle % 2 == 0) n_tr_double++; else n_tr_single++;
    end
    if (tr_seu != 0 && cycle % 5 == 0) seu[$urandom_range(N - 1)] = 8'(1 << $urandom_range(7));
    #1;
    for (int n = 0; n < N; n++) lo_arq[n] = lo_valid[n] && !lo_stop[n] && dec_arq[n];
    #1;
    for (int n = 0; n < N; n++) begin
      if (pend[n]) begin
        if (li_stop[n]) n_stop++;
        else if (li_arq[n]) begin
          check(pcorrupt[n], "ARQ only for a corrupted injection");
          pcorrupt[n] = 0;
          n_li_arq++;
        end else begin
          pend[n] = 0;
        end
      end
      if (lo_valid[n] && !lo_stop[n]) begin
        if (lo_arq[n]) n_lo_arq++;
        else begin
          int id;
          id = int'(lo_flit[n].payload[17:2]);
          if (dest_of.exists(id)) begin
            check(dest_of[id] == n, "delivered at its destination");
            dest_of.delete(id);
            if (around.exists(id)) n_around++;
            n_deliv++;
          end else check(0, "delivered once");
        end
      end
      for (int p = 0; p < NPORTS; p++) begin
        n_corr += corrected[n][p] ? 1 : 0;
        n_arq += arqev[n][p] ? 1 : 0;
        n_drop += drop[n][p] ? 1 : 0;
        n_reroute += rerouted[n][p] ? 1 : 0;
      end
      n_retry += retry[n] ? 1 : 0;
      n_perm += perm[n] ? 1 : 0;
    end
  endtask

  task automatic drain(int max_cycles);
    int k;
    inj_pct = 0;
    k = 0;
    while (k < max_cycles && dest_of.size() > n_drop) begin
      step_cycle();
      k++;
    end
    repeat (20) step_cycle();
  endtask


  initial begin
    int d0, r0;
    li_valid = '0; lo_stop = '0; lo_arq = '0;
    for (int n = 0; n < N; n++) begin
      li_flit[n] = '0; xbar_defect[n] = '0; seu[n] = '0; pend[n] = 0;
      for (int p = 0; p < NPORTS; p++) begin
        link_err[n][p] = '0; buf_defect[n][p] = '0;
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // A: transient errors, upsets, back-pressure
    inj_pct = 150; tr_link = 1; tr_seu = 1; in_err_pct = 3; stop_pct = 10;
    repeat (1500) step_cycle();
    drain(2000);
    tr_link = 0; tr_seu = 0; in_err_pct = 0;
    check(dest_of.size() == 0 && n_drop == 0, "A: transient errors lose nothing");
    $display("A done at cycle %0d: injected=%0d delivered=%0d", cycle, n_inj, n_deliv);
    // B: broken slot 2 of node 5's local input buffer
    buf_defect[5][0] = 4'b0100;
    inj_pct = 150;
    for (int i = 0; i < 4000 && slot_faulty[5][0] != 4'b0100; i++) step_cycle();
    check(slot_faulty[5][0] == 4'b0100, "B: slot flagged");
    repeat (300) step_cycle();
    drain(2000);
    buf_defect[5][0] = '0;
    $display("B done at cycle %0d: drops=%0d", cycle, n_drop);
    // C: broken crossbar channel of node 3's local output
    xbar_defect[3] = 7'b0000001;
    inj_pct = 150;
    for (int i = 0; i < 4000 && !bact[3][0]; i++) step_cycle();
    check(bact[3][0], "C: bypass link in use");
    d0 = n_drop;
    repeat (500) step_cycle();
    drain(2000);
    check(n_drop == d0, "C: bypass delivers");
    $display("C done at cycle %0d: drops=%0d", cycle, n_drop);
    // D: broken link node 0 east -> node 1
    link_err_hold = 1;
    r0 = n_reroute;
    inj_pct = 150;
    for (int i = 0; i < 4000 && !status[0].link_fault[P_EAST]; i++) step_cycle();
    check(status[0].link_fault[P_EAST], "D: link declared faulty");
    d0 = n_drop;
    repeat (1000) step_cycle();
    drain(3000);
    $display("D done at cycle %0d: drops=%0d local reroutes=%0d detours 0->1=%0d", cycle, n_drop,
             n_reroute - r0, n_around);
    // every flit either delivered or dropped during diagnosis
    check(dest_of.size() == n_drop, "injected = delivered + dropped");
    $display("injected=%0d delivered=%0d dropped=%0d corrected=%0d arq=%0d lo_arq=%0d li_arq=%0d",
             n_inj, n_deliv, n_drop, n_corr, n_arq, n_lo_arq, n_li_arq);
    $display("ser_retries=%0d permanent=%0d rerouted=%0d stops=%0d transients=%0d/%0d",
             n_retry, n_perm, n_reroute, n_stop, n_tr_single, n_tr_double);
    check(n_corr > 0, "ECC correction happened");
    check(n_arq > 0, "link ARQ happened");
    check(n_li_arq > 0, "ARQ to a tile happened");
    check(n_lo_arq > 0, "ARQ from a tile happened");
    check(n_retry > 0, "redundant-computation vote happened");
    check(n_perm > 0, "permanent fault detected");
    check(n_around > 0, "flits routed around a faulty link");
    check(n_stop > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the broken link of phase D stays broken
  bit link_err_hold = 0;
  always @(negedge clk) if (link_err_hold) #0.5 link_err[0][P_EAST] = 2'b10;
endmodule
