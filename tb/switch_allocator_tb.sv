// switch_allocator_tb: random requests held for one allocation round,
// occasionally with a one-cycle upset on the allocation logic. The
// committed grants are compared with a round-robin reference model
// (per output, the first requester at or after the input following the
// last one granted); the commit must come in the second cycle of a round,
// or the third when the upset hit one of the first two computations.
module switch_allocator_tb;
  import feto_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [6:0] req, freev;
  port_e rport [7];
  logic seu, mism, commit;
  logic [1:0] phase;
  logic [48:0] grant;
  int checks = 0, failures = 0;
  int ptr [7];
  int retries = 0;

  switch_allocator dut (.clk, .rst_n, .req_i(req), .req_port_i(rport), .out_free_i(freev),
    .seu_i(seu), .retry_i(mism), .mismatch_o(mism), .phase_o(phase),
    .commit_o(commit), .grant_o(grant));

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

  initial begin
    logic [48:0] exp;
    int cyc, upset;
    req = '0; freev = '0; seu = 0;
    foreach (rport[i]) rport[i] = P_LOCAL;
    foreach (ptr[i]) ptr[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 2000; r++) begin
      @(negedge clk);
      check(phase == 2'd1, "round starts in phase 1");
      // heavy contention: ports drawn from a small set half of the time
      for (int i = 0; i < 7; i++) begin
        req[i] = $urandom_range(3) != 0;
        rport[i] = port_e'((r % 2) ? $urandom_range(1, 2) : $urandom_range(6));
      end
      freev = 7'($urandom) | 7'h06;
      exp = '0;
      for (int o = 0; o < 7; o++) begin
        bit done;
        done = 0;
        for (int k = 0; k < 7; k++) begin
          int i;
          i = (ptr[o] + k) % 7;
          if (!done && freev[o] && req[i] && rport[i] == port_e'(o)) begin
            exp[o*7 + i] = 1;
            done = 1;
          end
        end
      end
      upset = (r % 5 == 0) ? 1 : (r % 5 == 1) ? 2 : 0;
      cyc = 0;
      forever begin
        cyc++;
        seu = (cyc == upset);
        #1;
        if (commit) break;
        @(negedge clk);
        // after phase 1 the free flags may change: the snapshot must be used
        freev = 7'($urandom);
      end
      check(grant == exp, "grants match reference");
      check(cyc == (upset != 0 ? 3 : 2), "commit cycle");
      if (cyc == 3) retries++;
      for (int o = 0; o < 7; o++)
        for (int i = 0; i < 7; i++)
          if (exp[o*7 + i]) ptr[o] = (i + 1) % 7;
      seu = 0;
    end
    check(retries == 800, "upsets corrected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
