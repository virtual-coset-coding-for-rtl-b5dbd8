// tb_vcc_encoder: self-checking test of vcc_encoder.
//
// 1. The worked example of VCC(64,64,4): four given 16-bit kernels, a stored
//    word of all zeros, SLC cost (ones count). Expected X_opt, index
//    {00, 0110} and cost 17 are the published example values.
// 2. Random words at the full size VCC(64,256,16), in both cell modes and
//    both cost orders, with random stored words and stuck cells, compared
//    with the reference model in vcc_ref_pkg.
// 3. In MLC mode the left digits must be unchanged.
module tb_vcc_encoder;
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

  // --- worked example, R = 4 ---
  logic [63:0] ex_d, ex_code;
  logic [5:0]  ex_aux;
  cost_t       ex_cost;
  kernel_t     ex_k [4];

  vcc_encoder #(.R(4)) u_ex (
    .data_i(ex_d), .old_i(64'b0), .old_aux_i(6'b0), .stuck_i(70'b0),
    .kernels_i(ex_k), .mlc_i(1'b0), .opt_saw_first_i(1'b0),
    .code_o(ex_code), .aux_o(ex_aux), .cost_o(ex_cost));

  // --- full size ---
  logic [63:0] d, od, code;
  logic [7:0]  oaux, aux;
  logic [71:0] st;
  kernel_t     ks [16];
  logic        mlc, sawf;
  cost_t       cst;

  vcc_encoder u_dut (
    .data_i(d), .old_i(od), .old_aux_i(oaux), .stuck_i(st), .kernels_i(ks),
    .mlc_i(mlc), .opt_saw_first_i(sawf), .code_o(code), .aux_o(aux), .cost_o(cst));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ex_d = {16'b1010001011011011, 16'b0101000100100100,
            16'b0100011001000101, 16'b1010010100001011};
    ex_k[0] = 16'b1010100111011011;
    ex_k[1] = 16'b0100011111110100;
    ex_k[2] = 16'b0011001001100011;
    ex_k[3] = 16'b1010110001000111;
    #1;
    check(ex_code == {16'b0000101100000000, 16'b0000011100000000,
                      16'b0001000001100001, 16'b0000110011010000}, "example X_opt");
    check(ex_aux == 6'b000110, "example aux 00 0110");
    check(ex_cost == cost_t'(17 << 10), "example cost 17");

    for (int t = 0; t < 400; t++) begin
      logic [63:0] rx;
      logic [7:0]  ra;
      int          rb;
      kern_arr_t   rk;
      d    = {$urandom, $urandom};
      od   = {$urandom, $urandom};
      oaux = 8'($urandom);
      // about 1 in 8 cells stuck, all clear in some runs
      st   = (t % 4 == 0) ? '0 : ({$urandom, $urandom, 8'($urandom)} &
                                  {$urandom, $urandom, 8'($urandom)} &
                                  {$urandom, $urandom, 8'($urandom)});
      mlc  = t[0];
      sawf = t[1];
      for (int i = 0; i < 16; i++) begin
        ks[i] = 16'($urandom);
        rk[i] = ks[i];
      end
      #1;
      encode(d, od, oaux, st, rk, 16, mlc, sawf, rx, ra, rb);
      check(code == rx, $sformatf("t=%0d code %h exp %h", t, code, rx));
      check(aux == ra, $sformatf("t=%0d aux %h exp %h", t, aux, ra));
      check(int'(cst) == rb, $sformatf("t=%0d cost %0d exp %0d", t, cst, rb));
      if (mlc) check((code & {32{2'b10}}) == (d & {32{2'b10}}), "MLC left digits kept");
      check(decode(code, aux, rk, mlc) == d, "reference decode of the result");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
