// tb_vcc_workload_random: random-data write study on a small MLC memory.
//
// Encrypted data is modelled as uniformly random words. WRITES random words
// are written to a memory of NW 64-bit words (with their 8-bit index cells)
// that starts with random contents; every bit has a 1 in 100 chance of being
// a stuck cell, which keeps its value. Each write is encoded by the full-size
// VCC(64,256,16) encoder with kernels generated from the word, stored, read
// back and decoded with kernels regenerated from the stored word. It is run
// twice: energy first, then stuck-at-wrong (SAW) first.
// Reported: MLC write energy (including index cells) and SAW cells, encoded
// against writing the raw word. Checked: every write without a SAW cell
// decodes to the written word; encoding saves energy (more than 20% when
// energy is optimised first); SAW first removes more than a quarter of the
// SAW cells of unencoded writing and more than energy first does.
// Bound: left digits are never encoded, so a stuck cell whose stored left
// digit differs from the new word's cannot be matched. For random data that
// is 2/3 of the cells that would be written wrong unencoded (a changed symbol
// has a differing left digit with probability (1/2)/(3/4)), so at most about
// a third of the SAW cells can be removed in MLC mode.
module tb_vcc_workload_random;
  import vcc_pkg::*;
  import vcc_ref_pkg::*;

  localparam int NW     = 64;
  localparam int WRITES = 3000;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [63:0] d, od, code, dec_in, dec_out;
  logic [7:0]  oaux, aux, dec_aux;
  logic [71:0] st;
  logic        sawf;
  cost_t       cst;
  kernel_t     k_enc [16];
  kernel_t     k_dec [16];

  vcc_coset_generator u_ge (.word_i(d), .kernels_o(k_enc));
  vcc_encoder u_enc (
    .data_i(d), .old_i(od), .old_aux_i(oaux), .stuck_i(st), .kernels_i(k_enc),
    .mlc_i(1'b1), .opt_saw_first_i(sawf), .code_o(code), .aux_o(aux), .cost_o(cst));
  vcc_coset_generator u_gd (.word_i(dec_in), .kernels_o(k_dec));
  vcc_decoder u_dec (.code_i(dec_in), .aux_i(dec_aux), .kernels_i(k_dec), .mlc_i(1'b1),
                     .data_o(dec_out));

  logic [63:0] mem   [NW];
  logic [7:0]  maux  [NW];
  logic [71:0] stuck [NW];

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e_enc, e_raw, s_enc, s_raw, s_ef;
    for (int run = 0; run < 2; run++) begin
      sawf = (run == 1);
      e_enc = 0; e_raw = 0; s_enc = 0; s_raw = 0;
      for (int a = 0; a < NW; a++) begin
        mem[a]  = {$urandom, $urandom};
        maux[a] = 8'($urandom);
        for (int b = 0; b < 72; b++) stuck[a][b] = ($urandom % 100) == 0;
      end
      for (int t = 0; t < WRITES; t++) begin
        int a, e, s, ea, sa;
        logic [71:0] nw, ow, sk;
        a    = $urandom % NW;
        d    = {$urandom, $urandom};
        od   = mem[a];
        oaux = maux[a];
        st   = stuck[a];
        #1;
        cost({16'b0, code}, {16'b0, od}, {8'b0, st[71:8]}, 64, 1'b1, e, s);
        cost({72'b0, aux}, {72'b0, oaux}, {72'b0, st[7:0]}, 8, 1'b1, ea, sa);
        e_enc += e + ea; s_enc += s + sa;
        cost({16'b0, d}, {16'b0, od}, {8'b0, st[71:8]}, 64, 1'b1, e, s);
        e_raw += e; s_raw += s;
        // store; a stuck cell keeps both of its digits
        nw = {code, aux};
        ow = {od, oaux};
        sk = st;
        for (int b = 0; b < 72; b += 2) if (sk[b] || sk[b+1]) sk[b +: 2] = 2'b11;
        nw = (nw & ~sk) | (ow & sk);
        mem[a]  = nw[71:8];
        maux[a] = nw[7:0];
        dec_in  = mem[a];
        dec_aux = maux[a];
        #1;
        if (nw == {code, aux}) check(dec_out == d, $sformatf("write %0d reads back", t));
      end
      $display("%s first: energy encoded %0d raw %0d (%0d%% saved); SAW cells encoded %0d raw %0d (%0d%% fewer)",
               sawf ? "SAW" : "energy", e_enc, e_raw, (e_raw - e_enc) * 100 / e_raw,
               s_enc, s_raw, (s_raw - s_enc) * 100 / s_raw);
      check(e_enc < e_raw, "encoding saves energy");
      if (!sawf) check((e_raw - e_enc) * 100 > 20 * e_raw, "energy first saves more than 20%");
      if (!sawf) s_ef = s_enc;
      if (sawf)  check(s_enc * 4 < s_raw * 3, "SAW first removes more than a quarter of SAW cells");
      if (sawf)  check(s_enc < s_ef, "SAW first beats energy first on SAW cells");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
