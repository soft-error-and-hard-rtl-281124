// sher3dr_router_tb: one router at (1,1,1) of a 4x4x4 mesh, surrounded by
// models of its neighbours and tile. Every flit carries a unique id in its
// payload; a scoreboard checks that each flit leaves exactly once, on the
// port its next-port field named, with its destination kept, a new
// next-port equal to the LAFT choice at the neighbour, and a valid code.
// Phases:
//   1  isolated flits: latency from the cycle a flit is taken to the
//      cycle it leaves must be 3 or 4 (the four-cycle pipeline, with or
//      without waiting for the start of an allocation round);
//   2  random traffic on all seven inputs with back-pressure, transient
//      link errors (ARQ on input and output) and upsets in the next-port
//      computation and allocation logic: nothing may be lost;
//   3  a broken buffer slot (input 2, slot 1): flits through it fail, are
//      dropped, and the slot must end up flagged and avoided;
//   4  a broken crossbar channel (output 2): it must end up bypassed.
// Each mechanism is counted and must have happened.
module sher3dr_router_tb;
  import feto_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [6:0] in_valid, in_stop, in_arq, out_valid, out_stop, out_arq;
  flit_t in_flit [7];
  flit_t out_flit [7];
  node_status_t nbr [7];
  node_status_t status;
  logic [3:0] buf_defect [7];
  logic [3:0] slot_faulty [7];
  logic [6:0] xbar_defect, corrected, drop, rerouted, bact;
  logic [7:0] seu;
  logic retry, perm;
  int checks = 0, failures = 0;

  sher3dr_router dut (
    .clk, .rst_n, .pos_i('{z: 3'd1, y: 3'd1, x: 3'd1}), .in_valid_i(in_valid), .in_flit_i(in_flit), .in_stop_o(in_stop),
    .in_arq_o(in_arq), .out_valid_o(out_valid), .out_flit_o(out_flit),
    .out_stop_i(out_stop), .out_arq_i(out_arq), .nbr_status_i(nbr), .status_o(status),
    .buf_defect_i(buf_defect), .xbar_defect_i(xbar_defect), .seu_i(seu),
    .corrected_o(corrected), .ser_retry_o(retry), .perm_ev_o(perm), .arq_ev_o(), .drop_o(drop),
    .rerouted_o(rerouted), .bypass_active_o(bact), .slot_faulty_o(slot_faulty));

  // downstream ECC checkers
  logic [6:0] dec_arq;
  for (genvar o = 0; o < 7; o++) begin : g_dec
    ecc_decoder d (.flit_i(out_flit[o]), .flit_o(), .status_o(), .corrected_o(), .arq_o(dec_arq[o]));
  end

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 60) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam coord_t CUR  = '{z: 3'd1, y: 3'd1, x: 3'd1};
  localparam coord_t DIMS = '{z: 3'd4, y: 3'd4, x: 3'd4};

  // scoreboard, indexed by id
  flit_t  sent_flit [int];
  int     sent_time [int];
  bit     dropped [int];
  int     next_id = 0;
  int     cycle = 0;
  // per-input pending flit
  bit     pend [7];
  flit_t  pflit [7];
  int     pid [7];
  bit     pcorrupt [7];
  bit     last_arq [7];
  // knobs
  int     inj_pct = 0, stop_pct = 0, tarq_pct = 0, seu_on = 0, in_err_pct = 0;
  bit     lat_check = 0;
  int     lat3 = 0, lat4 = 0;
  int     n_deliv = 0, n_in_arq = 0, n_out_arq = 0, n_retry = 0, n_perm = 0, n_drop = 0,
          n_corr = 0, n_stop = 0;

  function automatic flit_t make_flit(int id);
    header_t h;
    logic [17:0] pl;
    h.ftype = FT_SINGLE;
    h.dest = '{z: 3'($urandom_range(3)), y: 3'($urandom_range(3)), x: 3'($urandom_range(3))};
    h.next_port = 3'($urandom_range(6));
    pl = {16'(id), 2'b00};
    return flit_t'({ecc_parity({h, pl}), h, pl});
  endfunction

  // one clock cycle of all neighbour models
  task automatic step_cycle();
    @(negedge clk);
    cycle++;
    for (int p = 0; p < 7; p++) begin
      if (!pend[p] && $urandom_range(99) < inj_pct) begin
        pend[p] = 1;
        pid[p] = next_id++;
        pflit[p] = make_flit(pid[p]);
        pcorrupt[p] = $urandom_range(99) < in_err_pct;
      end
      in_valid[p] = pend[p];
      in_flit[p] = pcorrupt[p] ? flit_t'(pflit[p] ^ DEFECT_MASK) : pflit[p];
      // single-bit errors are corrected silently
      if (!pcorrupt[p] && in_err_pct > 0 && $urandom_range(99) < in_err_pct)
        in_flit[p][7] = ~in_flit[p][7];
      out_stop[p] = $urandom_range(99) < stop_pct;
    end
    seu = (seu_on != 0 && cycle % 7 == 0) ? 8'(1 << $urandom_range(7)) : 8'h00;
    #1;
    // a transient error never hits the same flit twice
    for (int o = 0; o < 7; o++) begin
      out_arq[o] = out_valid[o] && !out_stop[o] &&
                   (dec_arq[o] || (!last_arq[o] && $urandom_range(99) < tarq_pct));
      if (out_arq[o]) last_arq[o] = 1;
      else if (out_valid[o] && !out_stop[o]) last_arq[o] = 0;
    end
    #1;
    for (int p = 0; p < 7; p++) if (pend[p]) begin
      if (in_stop[p]) n_stop++;
      else if (in_arq[p]) begin
        check(pcorrupt[p], "ARQ only for a corrupted flit");
        pcorrupt[p] = 0;
        n_in_arq++;
      end else begin
        check(!pcorrupt[p], "corrupted flit refused");
        sent_flit[pid[p]] = pflit[p];
        sent_time[pid[p]] = cycle;
        pend[p] = 0;
      end
    end
    for (int o = 0; o < 7; o++) begin
      int id;
      id = int'(out_flit[o].payload[17:2]);
      if (out_valid[o] && out_arq[o]) n_out_arq++;
      if (drop[o]) begin
        check(out_valid[o] && sent_flit.exists(id), "drop of a known flit");
        dropped[id] = 1;
        sent_flit.delete(id);
        n_drop++;
      end else if (out_valid[o] && !out_stop[o] && !out_arq[o]) begin
        flit_t e;
        port_e eo, en;
        if (!sent_flit.exists(id)) begin
          check(0, "delivered flit is known and not yet delivered");
        end else begin
          e = sent_flit[id];
          eo = port_e'(e.hdr.next_port);
          en = (eo == P_LOCAL) ? P_LOCAL :
               laft_select(step(CUR, eo), e.hdr.dest, DIMS, '0, '0, opposite(eo));
          check(o == int'(eo), "output port = next-port");
          check(out_flit[o].hdr.dest == e.hdr.dest && out_flit[o].payload == e.payload, "fields kept");
          check(port_e'(out_flit[o].hdr.next_port) == en, "new next-port");
          check(out_flit[o].parity == ecc_parity({out_flit[o].hdr, out_flit[o].payload}), "code valid");
          if (lat_check) begin
            int l;
            l = cycle - sent_time[id];
            check(l == 3 || l == 4, $sformatf("latency 3 or 4 cycles (%0d)", l));
            if (l == 3) lat3++;
            if (l == 4) lat4++;
          end
          sent_flit.delete(id);
          n_deliv++;
        end
      end
    end
    if (retry) n_retry++;
    if (perm) n_perm++;
    n_corr += $countones(corrected);
  endtask

  task automatic drain(int max_cycles);
    int k;
    inj_pct = 0;
    k = 0;
    while ((sent_flit.size() > 0 || pend[0] || pend[1] || pend[2] || pend[3] || pend[4] ||
            pend[5] || pend[6]) && k < max_cycles) begin
      step_cycle();
      k++;
    end
    check(sent_flit.size() == 0, "all flits delivered");
  endtask

  initial begin
    int d3, d_before;
    in_valid = '0; out_stop = '0; out_arq = '0; seu = '0; xbar_defect = '0;
    foreach (in_flit[p]) in_flit[p] = '0;
    foreach (nbr[p]) nbr[p] = '0;
    foreach (buf_defect[p]) buf_defect[p] = '0;
    foreach (pend[p]) pend[p] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 1: isolated flits, latency
    lat_check = 1;
    for (int i = 0; i < 100; i++) begin
      int p;
      @(negedge clk);
      p = int'($urandom_range(6));
      pend[p] = 1; pid[p] = next_id++; pflit[p] = make_flit(pid[p]); pcorrupt[p] = 0;
      step_cycle();
      repeat (6 + (i % 2)) step_cycle();
    end
    check(sent_flit.size() == 0 && lat3 > 0 && lat4 > 0, "latency cases seen");
    lat_check = 0;
    // 2: random traffic with transient errors and upsets
    inj_pct = 30; stop_pct = 20; tarq_pct = 3; seu_on = 1; in_err_pct = 5;
    repeat (4000) step_cycle();
    drain(500);
    seu_on = 0; tarq_pct = 0; in_err_pct = 0;
    check(n_drop == 0, "no drops from transient errors");
    // 3: broken slot 1 of input 2
    buf_defect[2] = 4'b0010;
    d_before = n_drop;
    for (int i = 0; i < 3000 && slot_faulty[2] != 4'b0010; i++) begin
      pend[2] = pend[2];
      inj_pct = 40;
      step_cycle();
    end
    check(slot_faulty[2] == 4'b0010, "broken slot flagged");
    d3 = n_drop;
    check(d3 - d_before == 2, "two flits lost while diagnosing the slot");
    repeat (1500) step_cycle();
    drain(500);
    // a flit already sitting in the slot when it is flagged is still lost
    check(n_drop - d3 <= 1, "flagged slot no longer used");
    buf_defect[2] = '0;
    // 4: broken crossbar channel of output 2
    xbar_defect[2] = 1'b1;
    for (int i = 0; i < 3000 && !bact[2]; i++) begin
      inj_pct = 40;
      step_cycle();
    end
    check(bact[2], "bypass active for output 2");
    d3 = n_drop;
    repeat (1500) step_cycle();
    drain(500);
    check(n_drop == d3 && status.link_fault == '0, "bypass carries output 2");
    $display("delivered=%0d lat3=%0d lat4=%0d in_arq=%0d out_arq=%0d retries=%0d perm=%0d drops=%0d corrected=%0d stops=%0d",
             n_deliv, lat3, lat4, n_in_arq, n_out_arq, n_retry, n_perm, n_drop, n_corr, n_stop);
    check(n_in_arq > 0 && n_out_arq > 0 && n_retry > 0 && n_perm > 0 && n_stop > 0 && n_corr > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
