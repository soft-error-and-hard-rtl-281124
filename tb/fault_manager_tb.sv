// fault_manager_tb: drives ARQ and delivery events of the outputs directly
// and walks through the diagnosis cases: a soft error (one ARQ, then
// delivered: nothing happens), a broken buffer slot (two permanent failures
// from the same slot: the slot is handed to the RAB), a crossbar fault
// (failures from two slots: bypass requested, next flit delivered: bypass
// kept), a link fault (bypass requested, next flit fails too: link declared
// faulty, bypass released) and a crossbar check with no free bypass.
module fault_manager_tb;
  import feto_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [6:0] arq, sent, bact, drop, breq, lfault;
  buf_pos_t pos [7];
  logic mark, perm;
  buf_pos_t mpos;
  int checks = 0, failures = 0;
  int marks = 0, drops = 0, perms = 0;

  fault_manager dut (.clk, .rst_n, .arq_ev_i(arq), .sent_i(sent), .pos_i(pos),
    .bypass_active_i(bact), .drop_o(drop), .rab_mark_o(mark), .rab_mark_pos_o(mpos),
    .bypass_req_o(breq), .link_fault_o(lfault), .perm_ev_o(perm));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (mark) marks++;
    drops += $countones(drop);
    if (perm) perms++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // one transmission attempt on output o: 'a' = ARQ, otherwise delivered
  task automatic attempt(int o, bit a, buf_pos_t p);
    @(negedge clk);
    pos[o] = p;
    arq = '0; sent = '0;
    arq[o] = a; sent[o] = !a;
    @(negedge clk);
    arq = '0; sent = '0;
  endtask

  // a flit from position p that fails permanently on output o
  task automatic perm_fail(int o, buf_pos_t p);
    attempt(o, 1, p);
    @(negedge clk);
    pos[o] = p; arq[o] = 1;
    #1 check(drop[o] && perm, "second ARQ drops the flit");
    @(negedge clk);
    arq = '0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    buf_pos_t pa, pb, pc;
    arq = '0; sent = '0; bact = '0;
    foreach (pos[i]) pos[i] = '0;
    pa = '{port: 3'd2, slot: 2'd1};
    pb = '{port: 3'd2, slot: 2'd2};
    pc = '{port: 3'd5, slot: 2'd0};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // soft error: ARQ then delivered
    attempt(1, 1, pa);
    attempt(1, 0, pa);
    check(perms == 0 && drops == 0, "soft error needs no diagnosis");
    // buffer fault at pa, seen on outputs 3 then 4
    perm_fail(3, pa);
    check(marks == 0 && breq == 0, "first failure only starts buffer check");
    perm_fail(4, pa);
    @(negedge clk);
    check(marks == 1 && mpos == pa, "same slot again: slot marked");
    check(breq == 0 && lfault == 0, "no crossbar action for a buffer fault");
    // crossbar fault on output 2: failures from two positions
    perm_fail(2, pa);
    perm_fail(2, pb);
    check(breq == 7'b0000100, "bypass requested for output 2");
    bact = breq;
    attempt(2, 0, pc);
    attempt(2, 0, pb);
    check(breq[2] && !lfault[2], "bypass kept after a good flit");
    // link fault on output 6
    perm_fail(6, pb);
    perm_fail(6, pc);
    check(breq[6], "bypass requested for output 6");
    bact = breq;
    perm_fail(6, pa);
    @(negedge clk);
    check(lfault[6] && !breq[6], "bypass did not help: link faulty");
    check(breq[2], "output 2 keeps its bypass");
    // crossbar check with no spare channel left
    perm_fail(1, pa);
    perm_fail(1, pc);
    bact = breq & 7'b0000100;
    @(negedge clk);
    @(negedge clk);
    check(lfault[1] && !breq[1], "no spare channel: link faulty");
    check(marks == 1, "marks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
