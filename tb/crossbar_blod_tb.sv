// crossbar_blod_tb: random one-grant-per-output patterns with crossbar
// defects on some outputs and bypass requests. Checks that an output with a
// bypass gets a clean flit, one without a bypass gets its defect, that at
// most NBYPASS outputs (lowest ports first) get a bypass, and the loads.
module crossbar_blod_tb;
  import feto_pkg::*;
  flit_t in [7];
  flit_t out [7];
  logic commit;
  logic [48:0] grant;
  logic [6:0] breq, defect, bact, load;
  int checks = 0, failures = 0;

  crossbar_blod #(.NBYPASS(2)) dut (.in_flit_i(in), .commit_i(commit), .grant_i(grant),
    .bypass_req_i(breq), .xbar_defect_i(defect), .bypass_active_o(bact),
    .out_flit_o(out), .out_load_o(load));

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
    int src [7];
    logic [6:0] expb;
    int k;
    for (int t = 0; t < 3000; t++) begin
      foreach (in[i]) in[i] = flit_t'({$urandom, $urandom});
      grant = '0;
      for (int o = 0; o < 7; o++) begin
        src[o] = ($urandom_range(3) == 0) ? -1 : int'($urandom_range(6));
        if (src[o] >= 0) grant[o*7 + src[o]] = 1'b1;
      end
      commit = $urandom_range(1);
      breq = 7'($urandom) & 7'($urandom);
      defect = 7'($urandom);
      #1;
      expb = '0; k = 0;
      for (int o = 0; o < 7; o++) if (breq[o] && k < 2) begin expb[o] = 1; k++; end
      check(bact == expb, "bypass assignment");
      for (int o = 0; o < 7; o++) begin
        if (src[o] >= 0) begin
          check(load[o] == commit, "load");
          if (expb[o] || !defect[o]) check(out[o] == in[src[o]], "clean path");
          else check(out[o] == flit_t'(in[src[o]] ^ DEFECT_MASK), "defective channel");
        end else check(!load[o], "no load");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
