// vcc_unit: the VCC unit of the memory controller, for whole 512-bit lines.
//
// A line is cut into WORDS = 8 words of 64 bits (word 0 is line[511:448]);
// each word has its own encoder and decoder, and all eight work in parallel.
// The kernel source depends on the cell type: in MLC mode each word's
// kernels are generated from that word's left digits (vcc_coset_generator),
// on the write path from the encrypted word and on the read path from the
// stored code word, which carries the same left digits; in SLC mode all
// words use the shared kernel ROM (vcc_coset_rom). The use of the ROM for
// SLC is this design's reading of the SLC/MLC select of the architecture.
//
// Layout: aux bits of word w are aux[63-8w -: 8]; stuck flags of word w are
// stuck[575-72w -: 72], data flags first, then aux flags.
//
// Timing: each path has one register stage. enc_valid_i in cycle t gives
// enc_valid_o in cycle t+1 with the encoded line; the same holds for decode.
// Both paths may be used in the same cycle. There is no back-pressure: a
// result is shown for exactly one cycle and the results are held until the
// next request.
module vcc_unit
  import vcc_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          mlc_i,
  input  logic                          opt_saw_first_i,
  // encode (write) path
  input  logic                          enc_valid_i,
  input  logic [LINE_BITS-1:0]          enc_data_i,     // encrypted line
  input  logic [LINE_BITS-1:0]          enc_old_i,      // stored code words
  input  logic [WORDS*AUX_BITS-1:0]     enc_old_aux_i,  // stored aux bits
  input  logic [WORDS*(N_BITS+AUX_BITS)-1:0] enc_stuck_i,
  output logic                          enc_valid_o,
  output logic [LINE_BITS-1:0]          enc_code_o,
  output logic [WORDS*AUX_BITS-1:0]     enc_aux_o,
  // decode (read) path
  input  logic                          dec_valid_i,
  input  logic [LINE_BITS-1:0]          dec_code_i,
  input  logic [WORDS*AUX_BITS-1:0]     dec_aux_i,
  output logic                          dec_valid_o,
  output logic [LINE_BITS-1:0]          dec_data_o      // encrypted line
);

  localparam int unsigned SW = N_BITS + AUX_BITS;

  kernel_t rom_k [R_KERN];
  logic [LINE_BITS-1:0]      code_c, data_c;
  logic [WORDS*AUX_BITS-1:0] aux_c;

  vcc_coset_rom #(.R(R_KERN)) u_rom (.kernels_o(rom_k));

  for (genvar w = 0; w < int'(WORDS); w++) begin : g_word
    kernel_t gen_e [R_KERN];
    kernel_t gen_d [R_KERN];
    kernel_t k_e   [R_KERN];
    kernel_t k_d   [R_KERN];
    cost_t   cost_unused;

    vcc_coset_generator #(.R(R_KERN)) u_gen_e (
      .word_i(enc_data_i[LINE_BITS-1-w*N_BITS -: N_BITS]), .kernels_o(gen_e));
    vcc_coset_generator #(.R(R_KERN)) u_gen_d (
      .word_i(dec_code_i[LINE_BITS-1-w*N_BITS -: N_BITS]), .kernels_o(gen_d));

    assign k_e = mlc_i ? gen_e : rom_k;
    assign k_d = mlc_i ? gen_d : rom_k;

    vcc_encoder #(.R(R_KERN)) u_enc (
      .data_i         (enc_data_i[LINE_BITS-1-w*N_BITS -: N_BITS]),
      .old_i          (enc_old_i[LINE_BITS-1-w*N_BITS -: N_BITS]),
      .old_aux_i      (enc_old_aux_i[WORDS*AUX_BITS-1-w*AUX_BITS -: AUX_BITS]),
      .stuck_i        (enc_stuck_i[WORDS*SW-1-w*SW -: SW]),
      .kernels_i      (k_e),
      .mlc_i          (mlc_i),
      .opt_saw_first_i(opt_saw_first_i),
      .code_o         (code_c[LINE_BITS-1-w*N_BITS -: N_BITS]),
      .aux_o          (aux_c[WORDS*AUX_BITS-1-w*AUX_BITS -: AUX_BITS]),
      .cost_o         (cost_unused));

    vcc_decoder #(.R(R_KERN)) u_dec (
      .code_i   (dec_code_i[LINE_BITS-1-w*N_BITS -: N_BITS]),
      .aux_i    (dec_aux_i[WORDS*AUX_BITS-1-w*AUX_BITS -: AUX_BITS]),
      .kernels_i(k_d),
      .mlc_i    (mlc_i),
      .data_o   (data_c[LINE_BITS-1-w*N_BITS -: N_BITS]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_valid_o <= 1'b0;
      dec_valid_o <= 1'b0;
      enc_code_o  <= '0;
      enc_aux_o   <= '0;
      dec_data_o  <= '0;
    end else begin
      enc_valid_o <= enc_valid_i;
      dec_valid_o <= dec_valid_i;
      if (enc_valid_i) begin
        enc_code_o <= code_c;
        enc_aux_o  <= aux_c;
      end
      if (dec_valid_i) dec_data_o <= data_c;
    end
  end

endmodule
