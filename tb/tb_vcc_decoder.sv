// tb_vcc_decoder: self-checking test of vcc_decoder.
//
// 1. Decodes the worked example (X_opt and index {00, 0110} with its four
//    kernels) back to the published encrypted block D.
// 2. Random code words, kernels and indices at full size VCC(64,256,16) in
//    both cell modes, compared with the reference decoder; and random words
//    encoded by the reference encoder must come back unchanged.
module tb_vcc_decoder;
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

  logic [63:0] ex_x, ex_d;
  kernel_t     ex_k [4];
  vcc_decoder #(.R(4)) u_ex (.code_i(ex_x), .aux_i(6'b000110), .kernels_i(ex_k),
                             .mlc_i(1'b0), .data_o(ex_d));

  logic [63:0] x, dd;
  logic [7:0]  aux;
  kernel_t     ks [16];
  logic        mlc;
  vcc_decoder u_dut (.code_i(x), .aux_i(aux), .kernels_i(ks), .mlc_i(mlc), .data_o(dd));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ex_x = {16'b0000101100000000, 16'b0000011100000000,
            16'b0001000001100001, 16'b0000110011010000};
    ex_k[0] = 16'b1010100111011011;
    ex_k[1] = 16'b0100011111110100;
    ex_k[2] = 16'b0011001001100011;
    ex_k[3] = 16'b1010110001000111;
    #1;
    check(ex_d == {16'b1010001011011011, 16'b0101000100100100,
                   16'b0100011001000101, 16'b1010010100001011}, "example D");

    for (int t = 0; t < 400; t++) begin
      kern_arr_t rk;
      logic [63:0] d, rx;
      logic [7:0]  ra;
      int          rb;
      for (int i = 0; i < 16; i++) begin
        ks[i] = 16'($urandom);
        rk[i] = ks[i];
      end
      mlc = t[0];
      if (t < 200) begin
        x   = {$urandom, $urandom};
        aux = 8'($urandom);
        #1;
        check(dd == decode(x, aux, rk, mlc), $sformatf("t=%0d decode", t));
      end else begin
        d = {$urandom, $urandom};
        encode(d, {$urandom, $urandom}, 8'($urandom), '0, rk, 16, mlc, 1'b0, rx, ra, rb);
        x   = rx;
        aux = ra;
        #1;
        check(dd == d, $sformatf("t=%0d round trip", t));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
