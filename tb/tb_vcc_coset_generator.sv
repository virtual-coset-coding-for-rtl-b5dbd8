// tb_vcc_coset_generator: self-checking test of vcc_coset_generator.
//
// 1. With r = 4, the left digits of the worked-example block give the two
//    published base vectors and, with mask 01, the two published derived
//    kernels (kernel numbering i*b + j).
// 2. Full size r = 16 on random words against the reference generator; the
//    16 kernels of a word are checked to be distinct and free of
//    complementary pairs, and kernels must depend only on left digits.
module tb_vcc_coset_generator;
  import vcc_pkg::*;
  import vcc_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [63:0] ex_w;
  kernel_t     ex_k [4];
  vcc_coset_generator #(.R(4)) u_ex (.word_i(ex_w), .kernels_o(ex_k));

  logic [63:0] w, w2;
  kernel_t     k [16];
  kernel_t     k2 [16];
  vcc_coset_generator u_dut (.word_i(w), .kernels_o(k));
  vcc_coset_generator u_dut2 (.word_i(w2), .kernels_o(k2));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ex_w = {16'b1010001011011011, 16'b0101000100100100,
            16'b0100011001000101, 16'b1010010100001011};
    #1;
    check(ex_k[0] == 16'b1101101100000100, "base vector 0");
    check(ex_k[1] == 16'b0001000011000011, "base vector 1");
    check(ex_k[2] == 16'b1000111001010001, "base 0 xor mask 01");
    check(ex_k[3] == 16'b0100010110010110, "base 1 xor mask 01");

    for (int t = 0; t < 300; t++) begin
      kern_arr_t rk;
      w  = {$urandom, $urandom};
      // same left digits, different right digits
      w2 = (w & {32{2'b10}}) | ({$urandom, $urandom} & {32{2'b01}});
      #1;
      rk = gen(w, 16);
      for (int i = 0; i < 16; i++) begin
        check(k[i] == rk[i], $sformatf("t=%0d kernel %0d", t, i));
        check(k2[i] == k[i], "kernels depend only on left digits");
      end
      for (int i = 0; i < 16; i++)
        for (int j = i + 1; j < 16; j++)
          check(k[i] != k[j] && k[i] != ~k[j], "distinct, no complement pair");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
