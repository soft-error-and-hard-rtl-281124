// input_port_tb: an input port (west port of node (1,1,1) in a 4x4x4 mesh)
// fed with ECC-encoded flits, some with one flipped bit (must be corrected)
// and some with two (must be refused with an ARQ and not stored). The
// testbench plays the switch allocator: it follows the C1/C2(/C3) phases,
// grants the request at commit and checks the flit leaving for the
// crossbar: arrival order, the requested port, the rewritten next-port
// (LAFT reference from the shared package), untouched payload and a valid
// parity. Upsets on the next-port computation must be voted out and cost
// one extra cycle. A slot marked faulty must not be used again.
module input_port_tb;
  import feto_pkg::*;
  logic clk = 0, rst_n = 0;
  coord_t cur, dims;
  logic inv, stop, arq, corr, seu, mism, req, granted, rer;
  flit_t inf, xf;
  logic [6:0] ofault, ocong;
  node_status_t nbr [7];
  logic mark;
  logic [1:0] mslot;
  logic [3:0] sfaulty, sdefect;
  port_e rport;
  buf_pos_t pos;
  int checks = 0, failures = 0;
  flit_t q[$];
  int n_arq = 0, n_corr = 0, n_seu = 0, n_out = 0;
  int phase;

  input_port #(.DEPTH(4), .PORT(3'd4)) dut (
    .clk, .rst_n, .cur_i(cur), .dims_i(dims),
    .in_valid_i(inv), .in_flit_i(inf), .stop_o(stop), .arq_o(arq), .corrected_o(corr),
    .own_fault_i(ofault), .own_cong_i(ocong), .nbr_status_i(nbr),
    .mark_i(mark), .mark_slot_i(mslot), .slot_faulty_o(sfaulty), .slot_defect_i(sdefect),
    .seu_i(seu), .retry_i(mism), .mismatch_o(mism),
    .req_o(req), .req_port_o(rport), .granted_i(granted),
    .xbar_flit_o(xf), .pos_o(pos), .rerouted_o(rer));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic flit_t make_flit();
    header_t h;
    logic [17:0] pl;
    int np;
    h.ftype = FT_SINGLE;
    h.dest = '{z: 3'($urandom_range(3)), y: 3'($urandom_range(3)), x: 3'($urandom_range(3))};
    np = int'($urandom_range(6));  // from (1,1,1) every port stays in the mesh
    h.next_port = 3'(np);
    pl = 18'($urandom);
    return flit_t'({ecc_parity({h, pl}), h, pl});
  endfunction

  // phase tracking, as in ser_manager
  always @(posedge clk) begin
    if (!rst_n) phase <= 1;
    else phase <= (phase == 1) ? 2 : (phase == 2 && mism) ? 3 : 1;
  end
  assign granted = req && ((phase == 2 && !mism) || phase == 3);

  // upsets in some C1/C2 cycles
  int cyc = 0;
  always @(negedge clk) begin
    cyc++;
    seu = rst_n && (cyc % 23 == 0);
  end

  // output side checks at each grant
  always @(posedge clk) if (rst_n && granted) begin
    flit_t e;
    port_e eo, en;
    e = q.pop_front();
    eo = port_e'(e.hdr.next_port);
    en = (eo == P_LOCAL) ? P_LOCAL :
         laft_select(step(cur, eo), e.hdr.dest, dims, nbr[eo].link_fault, nbr[eo].congested, opposite(eo));
    check(rport == eo, "requested port");
    check(xf.payload == e.payload && xf.hdr.dest == e.hdr.dest, "payload and destination kept");
    check(port_e'(xf.hdr.next_port) == en, "new next-port");
    check(xf.parity == ecc_parity({xf.hdr, xf.payload}), "parity valid after rewrite");
    check(pos.port == 3'd4, "position port");
    n_out++;
    if (phase == 3) n_seu++;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flit_t f;
    int kind;
    cur = '{z: 3'd1, y: 3'd1, x: 3'd1};
    dims = '{z: 3'd4, y: 3'd4, x: 3'd4};
    inv = 0; inf = '0; ofault = '0; ocong = '0; mark = 0; mslot = 0; sdefect = '0; seu = 0;
    for (int p = 0; p < 7; p++) nbr[p] = '{link_fault: 7'($urandom) & 7'h7e & 7'($urandom), congested: 7'($urandom)};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      if (i == 700) begin
        // mark slot 2 faulty: capacity drops to 3
        mark = 1; mslot = 2'd2;
        @(negedge clk);
        mark = 0;
      end
      inv = $urandom_range(2) != 0;
      f = make_flit();
      kind = int'($urandom_range(9));
      inf = f;
      if (kind == 0) inf[5] = ~inf[5];
      if (kind == 1) inf = flit_t'(inf ^ DEFECT_MASK);
      #1;
      if (inv && !stop) begin
        if (kind == 1) begin
          check(arq && !corr, "double error refused");
          n_arq++;
        end else begin
          check(!arq && corr == (kind == 0), "clean or corrected");
          if (kind == 0) n_corr++;
          q.push_back(f);
        end
      end else check(!arq, "no ARQ without a transfer");
      if (i > 720) check(sfaulty == 4'b0100, "slot 2 marked");
    end
    @(negedge clk);
    inv = 0;
    repeat (40) @(negedge clk);
    check(q.size() == 0, "all stored flits left");
    check(n_arq > 0 && n_corr > 0 && n_seu > 0 && n_out > 500, "all cases happened");
    $display("out=%0d arq=%0d corrected=%0d voted=%0d", n_out, n_arq, n_corr, n_seu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
