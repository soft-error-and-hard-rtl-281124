// ecc_encoder_tb: checks the encoder against an independent bit-by-bit
// Hamming(22,16) SEC-DED reference written from the position table
// (check bit b covers every code position whose index has bit b set; data
// occupies positions 3,5,6,7,9..15,17..21; the sixth bit is overall parity).
module ecc_encoder_tb;
  import feto_pkg::*;
  logic [31:0] data;
  logic [11:0] par;
  flit_t       flit;
  int checks = 0, failures = 0;

  ecc_encoder dut (.data_i(data), .parity_o(par), .flit_o(flit));

  // Reference: data bit k sits at the k-th code position 3, 5, 6, 7, 9, ...
  // (positions that are not powers of two); check bit b covers the positions
  // with bit b set; bit 5 is the overall parity of data and checks.
  function automatic logic [5:0] ref_half(logic [15:0] d);
    logic [5:0] r;
    int pos;
    r = '0;
    pos = 2;
    for (int k = 0; k < 16; k++) begin
      pos++;
      while ((pos & (pos - 1)) == 0) pos++;
      r[4:0] = r[4:0] ^ (d[k] ? 5'(pos) : 5'd0);
    end
    r[5] = (^d) ^ (^r[4:0]);
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [11:0] exp;
    for (int i = 0; i < 2000; i++) begin
      case (i)
        0: data = '0;
        1: data = '1;
        2: data = 32'h0000_0001;
        3: data = 32'h8000_0000;
        default: data = $urandom;
      endcase
      #1;
      exp = {ref_half(data[31:16]), ref_half(data[15:0])};
      checks++;
      if (par !== exp || flit !== {exp, data}) begin
        failures++;
        if (failures < 5) $display("data %h par %h exp %h", data, par, exp);
      end
    end
    // linearity, used for header rewriting
    for (int i = 0; i < 200; i++) begin
      logic [31:0] a, b;
      logic [11:0] pa, pb;
      a = $urandom; b = $urandom;
      data = a; #1 pa = par;
      data = b; #1 pb = par;
      data = a ^ b; #1;
      checks++;
      if (par !== (pa ^ pb)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
