// ecc_decoder_tb: encodes random data, injects 0, 1 or 2 bit flips (in one
// half, or one in each half) and checks correction and ARQ flags against
// what a SEC-DED code must do.
module ecc_decoder_tb;
  import feto_pkg::*;
  logic [31:0] data;
  flit_t       enc, rx, fixed;
  ecc_status_e st;
  logic        corr, arq;
  int checks = 0, failures = 0;

  ecc_encoder enc_i (.data_i(data), .parity_o(), .flit_o(enc));
  ecc_decoder dut (.flit_i(rx), .flit_o(fixed), .status_o(st), .corrected_o(corr), .arq_o(arq));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s data=%h rx=%h", what, data, rx);
    end
  endtask

  // bit index inside half h (0..21: 16 data bits then 6 parity bits)
  function automatic int flit_bit(int h, int k);
    return (k < 16) ? 16*h + k : 32 + 6*h + (k - 16);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int h, k1, k2;
      data = $urandom;
      #1;
      rx = enc;
      h  = int'($urandom_range(1));
      k1 = int'($urandom_range(21));
      k2 = (k1 + 1 + int'($urandom_range(20))) % 22;
      case (i % 4)
        0: begin
          #1;
          check(!arq && !corr && st == ECC_OK && fixed == enc, "clean");
        end
        1: begin
          rx[flit_bit(h, k1)] = ~rx[flit_bit(h, k1)];
          #1;
          check(!arq && corr && st == ECC_CORRECTED && fixed == enc, "single");
        end
        2: begin
          rx[flit_bit(h, k1)] = ~rx[flit_bit(h, k1)];
          rx[flit_bit(h, k2)] = ~rx[flit_bit(h, k2)];
          #1;
          check(arq && !corr && st == ECC_ARQ, "double");
        end
        default: begin
          rx[flit_bit(0, k1)] = ~rx[flit_bit(0, k1)];
          rx[flit_bit(1, k2)] = ~rx[flit_bit(1, k2)];
          #1;
          check(!arq && corr && fixed == enc, "one per half");
        end
      endcase
    end
    // the defect pattern used for fault injection must be uncorrectable
    data = $urandom; #1 rx = enc ^ DEFECT_MASK; #1;
    check(arq, "defect mask");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
