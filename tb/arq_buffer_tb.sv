// arq_buffer_tb: load flits and answer them with stop, ARQ or acceptance in
// random order; checks the flit is held and resent unchanged until
// accepted, that sent/arq events match, and that drop empties the register.
module arq_buffer_tb;
  import feto_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load, freeb, ov, stop, arq, sent, arqev, drop;
  flit_t lf, of;
  buf_pos_t lp, pos;
  int checks = 0, failures = 0;

  arq_buffer dut (.clk, .rst_n, .load_i(load), .load_flit_i(lf), .load_pos_i(lp),
    .free_o(freeb), .pos_o(pos), .out_valid_o(ov), .out_flit_o(of),
    .stop_i(stop), .arq_i(arq), .sent_o(sent), .arq_ev_o(arqev), .drop_i(drop));

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
    flit_t f;
    int cycles, narq;
    load = 0; stop = 0; arq = 0; drop = 0; lf = '0; lp = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      check(freeb && !ov, "free before load");
      f = flit_t'({$urandom, $urandom});
      lf = f; lp = '{port: 3'($urandom_range(6)), slot: 2'($urandom)}; load = 1;
      @(negedge clk);
      load = 0;
      check(ov && of == f && pos == lp, "loaded");
      cycles = 0; narq = 0;
      forever begin
        stop = $urandom_range(3) == 0;
        arq  = !stop && $urandom_range(2) == 0;
        drop = (k % 10 == 9) && narq >= 2;
        #1;
        check(sent == (!stop && !arq) && arqev == (!stop && arq), "events");
        if (drop) begin
          @(negedge clk); stop = 0; arq = 0; drop = 0; #1;
          check(!ov && freeb, "dropped");
          break;
        end
        if (sent) begin
          @(negedge clk); stop = 0; arq = 0; #1;
          check(!ov && freeb, "freed after acceptance");
          break;
        end
        if (arq) narq++;
        @(negedge clk);
        check(ov && of == f, "held and resent unchanged");
        cycles++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
