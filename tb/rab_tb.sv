// rab_tb: random writes and reads against a queue model, with slots marked
// faulty along the way. Checks arrival order, that the usable capacity equals
// the number of healthy slots, that a marked slot is never written again, and
// that a defective slot corrupts what is read from it.
module rab_tb;
  import feto_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic wr, rd, mark;
  flit_t wflit, hflit;
  logic hvalid, full;
  logic [1:0] hslot, mslot;
  logic [2:0] count;
  logic [DEPTH-1:0] faulty, defect;
  int checks = 0, failures = 0;
  flit_t q[$];
  int unsigned seen_slot_writes [DEPTH];

  rab #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .wr_i(wr), .wr_flit_i(wflit), .rd_i(rd),
    .head_valid_o(hvalid), .head_flit_o(hflit), .head_slot_o(hslot),
    .full_o(full), .count_o(count), .mark_i(mark), .mark_slot_i(mslot),
    .faulty_o(faulty), .slot_defect_i(defect));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nfaulty;
  logic [DEPTH-1:0] model_faulty;
  initial begin
    wr = 0; rd = 0; mark = 0; mslot = 0; defect = '0; wflit = '0;
    model_faulty = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 1..3: run with 0, 1, 2 faulty slots
    for (int phase = 0; phase < 3; phase++) begin
      nfaulty = $countones(model_faulty);
      // fill until full: capacity must be DEPTH - nfaulty
      while (q.size() > 0) begin
        @(negedge clk); rd = 1; wr = 0;
        check(hvalid && hflit == q[0], "drain order");
        void'(q.pop_front());
        @(posedge clk); #1 rd = 0;
      end
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        wr = !full; wflit = flit_t'({$urandom, $urandom});
        if (!full) q.push_back(wflit);
        @(posedge clk); #1 wr = 0;
      end
      @(negedge clk);
      check(full && q.size() == DEPTH - nfaulty, "capacity");
      check(count == 3'(DEPTH - nfaulty), "count");
      // random traffic
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        rd = hvalid && ($urandom_range(1) == 1);
        wr = $urandom_range(1) == 1;
        wflit = flit_t'({$urandom, $urandom});
        if (hvalid) begin
          check(q.size() > 0 && hflit == q[0], "head order");
          check(!model_faulty[hslot], "read never from a faulty slot");
        end else check(q.size() == 0, "empty");
        @(posedge clk);
        if (rd) void'(q.pop_front());
        if (wr && !full) q.push_back(wflit);
        #1 rd = 0; wr = 0;
      end
      // mark a new slot faulty (while running)
      @(negedge clk);
      mark = 1; mslot = 2'(phase == 0 ? 1 : 3);
      model_faulty[mslot] = 1'b1;
      @(posedge clk); #1 mark = 0;
      check(faulty == model_faulty, "fault flags");
    end
    // defective slot: read data comes back corrupted
    while (q.size() > 0) begin
      @(negedge clk); rd = 1;
      void'(q.pop_front());
      @(posedge clk); #1 rd = 0;
    end
    @(negedge clk); wr = 1; wflit = flit_t'({$urandom, $urandom});
    @(posedge clk); #1 wr = 0;
    defect = '0; defect[hslot] = 1'b1;
    #1 check(hflit == flit_t'(wflit ^ DEFECT_MASK), "defect corrupts");
    defect = '0;
    #1 check(hflit == wflit, "no defect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
