// ser_manager_tb: a stage result that is constant per operation, with a
// single-cycle upset injected in the first, second or third computation (or
// none). Checks the committed value is always the true one and the timing:
// commit in the second cycle without an upset in the first two, in the
// third cycle (after the retry) otherwise.
module ser_manager_tb;
  localparam int W = 12;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] res, out;
  logic [1:0] phase;
  logic mism, commit;
  int checks = 0, failures = 0;
  int retries = 0;

  ser_manager #(.W(W)) dut (.clk, .rst_n, .result_i(res), .retry_i(mism),
    .phase_o(phase), .mismatch_o(mism), .commit_o(commit), .result_o(out));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v;
    int upset_at, cyc;
    res = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int op = 0; op < 300; op++) begin
      v = W'($urandom);
      upset_at = op % 4;          // 0: none, 1..3: computation number
      cyc = 0;
      // start of an operation: phase must be 1
      @(negedge clk);
      check(phase == 2'd1, "phase 1 at start");
      forever begin
        cyc++;
        res = (cyc == upset_at) ? v ^ W'(1 << (op % W)) : v;
        #1;
        if (commit) break;
        @(negedge clk);
      end
      check(out == v, "committed value");
      check(cyc == ((upset_at == 1 || upset_at == 2) ? 3 : 2), "commit cycle");
      if (cyc == 3) retries++;
    end
    check(retries == 150, "retries counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
