// vcc_mem_top: encrypted-NVM write/read datapath of a memory controller with
// Virtual Coset Coding.
//
// Write-back (last-level cache to memory): the plaintext line is encrypted in
// counter mode (vcc_ctr_crypto: counter + 1, four AES pads, XOR), then each
// 64-bit word is coset-encoded against the word already stored (vcc_unit),
// and the code words, their 8-bit indices and the new counter go to memory.
// The stored content needed for that comparison (code words, aux bits,
// counter) and the stuck-cell flags of the line arrive with the write; the
// controller reads them while the line is being encrypted.
// Read (memory to cache): the code words are decoded back to ciphertext
// (vcc_unit), then decrypted with the pads of the stored counter.
//
// The AES engines are outside: their input blocks and pads are ports. So are
// the last-level cache, the memory and the fault repository that supplies
// the stuck flags.
//
// Sequencing (this design's choice): one transaction at a time. When a read
// and a write are both waiting, the read goes first. A write takes
// 1 (accept) + 3 + AES latency (crypto) + 1 (encode) cycles until
// mem_wr_valid_o; a read takes 1 (decode) + 3 + AES latency cycles until
// llc_rd_valid_o. Results are one-cycle pulses; wr_ready_o / rd_ready_o are
// high only when idle.
module vcc_mem_top
  import vcc_pkg::*;
#(
  parameter int unsigned CTR_W  = 64,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      mlc_i,            // cell type of the memory
  input  logic                      opt_saw_first_i,  // cost order
  // write-back from the last-level cache, with the stored content (RMW)
  input  logic                      wr_valid_i,
  output logic                      wr_ready_o,
  input  logic [ADDR_W-1:0]         wr_addr_i,
  input  logic [LINE_BITS-1:0]      wr_line_i,
  input  logic [LINE_BITS-1:0]      wr_old_code_i,
  input  logic [WORDS*AUX_BITS-1:0] wr_old_aux_i,
  input  logic [CTR_W-1:0]          wr_old_ctr_i,
  input  logic [WORDS*(N_BITS+AUX_BITS)-1:0] wr_stuck_i,
  // write to memory
  output logic                      mem_wr_valid_o,
  output logic [ADDR_W-1:0]         mem_wr_addr_o,
  output logic [LINE_BITS-1:0]      mem_wr_code_o,
  output logic [WORDS*AUX_BITS-1:0] mem_wr_aux_o,
  output logic [CTR_W-1:0]          mem_wr_ctr_o,
  // line read from memory
  input  logic                      rd_valid_i,
  output logic                      rd_ready_o,
  input  logic [ADDR_W-1:0]         rd_addr_i,
  input  logic [LINE_BITS-1:0]      rd_code_i,
  input  logic [WORDS*AUX_BITS-1:0] rd_aux_i,
  input  logic [CTR_W-1:0]          rd_ctr_i,
  // plaintext line to the last-level cache
  output logic                      llc_rd_valid_o,
  output logic [ADDR_W-1:0]         llc_rd_addr_o,
  output logic [LINE_BITS-1:0]      llc_rd_line_o,
  // AES engines
  output logic                      aes_req_valid_o,
  input  logic                      aes_req_ready_i,
  output logic [PAD_BITS-1:0]       aes_blk_o [N_ENGINES],
  input  logic                      aes_rsp_valid_i,
  input  logic [PAD_BITS-1:0]       aes_pad_i [N_ENGINES]
);

  typedef enum logic [2:0] {T_IDLE, T_RD_DEC, T_RD_CRYPT, T_WR_CRYPT, T_WR_ENC} tstate_t;
  tstate_t state_q;

  logic [ADDR_W-1:0]         addr_q;
  logic [CTR_W-1:0]          ctr_q;
  logic [LINE_BITS-1:0]      old_code_q;
  logic [WORDS*AUX_BITS-1:0] old_aux_q;
  logic [WORDS*(N_BITS+AUX_BITS)-1:0] stuck_q;

  logic                 take_rd, take_wr;
  logic                 c_req_valid, c_req_ready, c_req_write;
  logic [CTR_W-1:0]     c_req_ctr;
  logic [LINE_BITS-1:0] c_req_data;
  logic                 c_rsp_valid, c_rsp_write;
  logic [CTR_W-1:0]     c_rsp_ctr;
  logic [LINE_BITS-1:0] c_rsp_data;

  logic                 enc_valid_o, dec_valid_o;
  logic [LINE_BITS-1:0] dec_data;

  assign wr_ready_o = (state_q == T_IDLE) && !rd_valid_i;
  assign rd_ready_o = (state_q == T_IDLE);
  assign take_rd    = rd_valid_i && rd_ready_o;
  assign take_wr    = wr_valid_i && wr_ready_o;

  // Crypto requests: a write straight from the cache, a read once decoded.
  always_comb begin
    c_req_valid = 1'b0;
    c_req_write = 1'b0;
    c_req_ctr   = ctr_q;
    c_req_data  = dec_data;
    if (take_wr) begin
      c_req_valid = 1'b1;
      c_req_write = 1'b1;
      c_req_ctr   = wr_old_ctr_i;
      c_req_data  = wr_line_i;
    end else if (state_q == T_RD_DEC && dec_valid_o) begin
      c_req_valid = 1'b1;
    end
  end

  vcc_ctr_crypto #(.CTR_W(CTR_W), .ADDR_W(ADDR_W)) u_crypto (
    .clk, .rst_n,
    .req_valid_i    (c_req_valid),
    .req_ready_o    (c_req_ready),
    .req_write_i    (c_req_write),
    .req_addr_i     (take_wr ? wr_addr_i : addr_q),
    .req_ctr_i      (c_req_ctr),
    .req_data_i     (c_req_data),
    .aes_req_valid_o(aes_req_valid_o),
    .aes_req_ready_i(aes_req_ready_i),
    .aes_blk_o      (aes_blk_o),
    .aes_rsp_valid_i(aes_rsp_valid_i),
    .aes_pad_i      (aes_pad_i),
    .rsp_valid_o    (c_rsp_valid),
    .rsp_write_o    (c_rsp_write),
    .rsp_ctr_o      (c_rsp_ctr),
    .rsp_data_o     (c_rsp_data));

  vcc_unit u_vcc (
    .clk, .rst_n,
    .mlc_i          (mlc_i),
    .opt_saw_first_i(opt_saw_first_i),
    .enc_valid_i    (c_rsp_valid && c_rsp_write),
    .enc_data_i     (c_rsp_data),
    .enc_old_i      (old_code_q),
    .enc_old_aux_i  (old_aux_q),
    .enc_stuck_i    (stuck_q),
    .enc_valid_o    (enc_valid_o),
    .enc_code_o     (mem_wr_code_o),
    .enc_aux_o      (mem_wr_aux_o),
    .dec_valid_i    (take_rd),
    .dec_code_i     (rd_code_i),
    .dec_aux_i      (rd_aux_i),
    .dec_valid_o    (dec_valid_o),
    .dec_data_o     (dec_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= T_IDLE;
      addr_q     <= '0;
      ctr_q      <= '0;
      old_code_q <= '0;
      old_aux_q  <= '0;
      stuck_q    <= '0;
    end else begin
      unique case (state_q)
        T_IDLE: begin
          if (take_rd) begin
            addr_q  <= rd_addr_i;
            ctr_q   <= rd_ctr_i;
            state_q <= T_RD_DEC;
          end else if (take_wr) begin
            addr_q     <= wr_addr_i;
            old_code_q <= wr_old_code_i;
            old_aux_q  <= wr_old_aux_i;
            stuck_q    <= wr_stuck_i;
            state_q    <= T_WR_CRYPT;
          end
        end
        T_RD_DEC:   if (dec_valid_o) state_q <= T_RD_CRYPT;
        T_RD_CRYPT: if (c_rsp_valid) state_q <= T_IDLE;
        T_WR_CRYPT: if (c_rsp_valid) begin
          ctr_q   <= c_rsp_ctr;
          state_q <= T_WR_ENC;
        end
        T_WR_ENC:   if (enc_valid_o) state_q <= T_IDLE;
        default:    state_q <= T_IDLE;
      endcase
    end
  end

  assign mem_wr_valid_o = enc_valid_o;
  assign mem_wr_addr_o  = addr_q;
  assign mem_wr_ctr_o   = ctr_q;
  assign llc_rd_valid_o = c_rsp_valid && !c_rsp_write;
  assign llc_rd_addr_o  = addr_q;
  assign llc_rd_line_o  = c_rsp_data;

  // The crypto unit is idle whenever this controller hands it a request.
  a_crypto_free: assert property (@(posedge clk) disable iff (!rst_n)
    c_req_valid |-> c_req_ready);

endmodule
