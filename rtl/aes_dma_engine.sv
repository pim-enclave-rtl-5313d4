// aes_dma_engine: the AES-capable DMA engine of one PIM-Enclave core.
//
// The PIM core programs it through memory-mapped registers, as in the
// paper's kernel example: DMA_SRC_ADDR, DMA_DST_ADDR, DMA_TRANSFER_SIZE (all
// in bytes, multiples of 16; the low four bits are ignored), then DMA_CMD,
// which starts the transfer, and polls DMA_STATUS (busy, done, auth_fail).
// The data key, session key and counter registers of the AES-GCM engine
// share the same register space. DMA_CMD bits [2:0] select the operation,
// bit 4 the key (0 data key, 1 session key):
//   BANK_TO_LOCAL / LOCAL_TO_BANK    plain copy of SIZE bytes.
//   DECRYPT_TRANSFER (bank -> local) the bank holds an encrypted block laid
//       out as the paper draws it: IV (one 16-byte beat, IV in the upper 96
//       bits), TAG (one beat), then SIZE bytes of ciphertext. The engine
//       reads IV and TAG, decrypts the ciphertext into local memory and
//       compares the computed tag with the stored one; a mismatch sets
//       auth_fail. The plaintext is already in local memory by then, so
//       software must check auth_fail before using it.
//   ENCRYPT_TRANSFER (local -> bank) encrypts SIZE bytes of local memory
//       with a fresh IV from the counter register and writes IV, ciphertext
//       and finally TAG in the same layout. One encrypted block therefore
//       occupies SIZE + 32 bytes (size_IV + size_tag = 32 in the paper's
//       block-size formula).
//
// Timing. Both memories answer one cycle after a request. A plain beat
// takes two cycles (read, write). An encrypted or decrypted beat takes
// three (read, AES-GCM, write): the AES stage adds exactly one cycle per
// 16 bytes, the latency the paper adds to every 16-byte chunk in its
// simulation. Counted in clock edges from the edge that writes DMA_CMD up
// to and including the edge that clears busy: plain 2n + 2, decrypt
// 3n + 10, encrypt 3n + 9 (n beats of 16 bytes). The paper states the function and the
// per-chunk latency; the register layout, the stored-IV format and the
// beat sequencing are this design's choices.
module aes_dma_engine
  import pim_pkg::*;
#(
  parameter int unsigned BANK_AW  = 22,   // bank beat address bits (64 MB)
  parameter int unsigned LOCAL_AW = 18    // local beat address bits (4 MB)
) (
  input  logic                clk,
  input  logic                rst_n,
  // register interface from the PIM core
  input  logic                cfg_we,
  input  logic [7:0]          cfg_addr,
  input  logic [31:0]         cfg_wdata,
  output logic [31:0]         cfg_rdata,
  // memory bank, wide port
  output logic                b_req,
  output logic                b_we,
  output logic [BANK_AW-1:0]  b_addr,
  output logic [127:0]        b_wdata,
  input  logic [127:0]        b_rdata,
  // local memory, wide port
  output logic                l_req,
  output logic                l_we,
  output logic [LOCAL_AW-1:0] l_addr,
  output logic [127:0]        l_wdata,
  input  logic [127:0]        l_rdata,
  // status
  output logic                busy,
  output logic                done,
  output logic                auth_fail
);

  typedef enum logic [3:0] {
    S_IDLE, S_RD, S_CRYPT, S_WR, S_HDR_IV, S_HDR_TAG, S_GSTART, S_GWAIT,
    S_WIV, S_FINAL, S_TAG, S_DONE
  } dstate_e;

  dstate_e      state;
  logic [31:0]  src_q, dst_q, size_q;
  dma_op_e      op_q;
  logic         key_q;
  logic [27:0]  n_q, i_q;
  logic [95:0]  iv_q;
  logic [127:0] tag_q, blk_data;

  // AES-GCM engine
  logic         g_start, g_ready, g_blk_valid, g_out_valid, g_final, g_tag_valid;
  logic [127:0] g_blk_out, g_tag;
  logic [95:0]  g_iv_used;
  logic [31:0]  g_cfg_rdata;
  logic         crypt_op, to_bank;

  assign crypt_op = (op_q == DMA_DECRYPT_TRANSFER) || (op_q == DMA_ENCRYPT_TRANSFER);
  assign to_bank  = (op_q == DMA_LOCAL_TO_BANK)    || (op_q == DMA_ENCRYPT_TRANSFER);

  aes_gcm_engine u_gcm (
    .clk, .rst_n,
    .cfg_we    (cfg_we && !busy),
    .cfg_addr, .cfg_wdata,
    .cfg_rdata (g_cfg_rdata),
    .start     (g_start),
    .key_sel   (key_q),
    .use_counter(op_q == DMA_ENCRYPT_TRANSFER),
    .iv_in     (iv_q),
    .decrypt   (op_q == DMA_DECRYPT_TRANSFER),
    .ready     (g_ready),
    .iv_used   (g_iv_used),
    .blk_valid (g_blk_valid),
    .blk_in    (blk_data),
    .out_valid (g_out_valid),
    .blk_out   (g_blk_out),
    .final_req (g_final),
    .tag_valid (g_tag_valid),
    .tag       (g_tag)
  );

  assign g_start     = (state == S_GSTART);
  assign g_blk_valid = (state == S_CRYPT);
  assign g_final     = (state == S_FINAL);

  // beat addresses: source and destination start beats
  logic [27:0] src_beat, dst_beat, data_off_src, data_off_dst;
  assign src_beat     = src_q[31:4];
  assign dst_beat     = dst_q[31:4];
  // encrypted blocks carry two header beats (IV, TAG) in the bank
  assign data_off_src = (op_q == DMA_DECRYPT_TRANSFER) ? 28'd2 : 28'd0;
  assign data_off_dst = (op_q == DMA_ENCRYPT_TRANSFER) ? 28'd2 : 28'd0;

  // memory requests
  always_comb begin
    b_req = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    l_req = 1'b0; l_we = 1'b0; l_addr = '0; l_wdata = '0;
    unique case (state)
      S_HDR_IV:  begin b_req = 1'b1; b_addr = BANK_AW'(src_beat); end
      S_HDR_TAG: begin b_req = 1'b1; b_addr = BANK_AW'(src_beat + 28'd1); end
      S_WIV: begin
        b_req = 1'b1; b_we = 1'b1; b_addr = BANK_AW'(dst_beat);
        b_wdata = {g_iv_used, 32'h0};
      end
      S_RD: begin
        if (to_bank) begin l_req = 1'b1; l_addr = LOCAL_AW'(src_beat + i_q); end
        else begin b_req = 1'b1; b_addr = BANK_AW'(src_beat + data_off_src + i_q); end
      end
      S_WR: begin
        if (to_bank) begin
          b_req = 1'b1; b_we = 1'b1;
          b_addr  = BANK_AW'(dst_beat + data_off_dst + i_q);
          b_wdata = crypt_op ? g_blk_out : (to_bank ? l_rdata : b_rdata);
        end else begin
          l_req = 1'b1; l_we = 1'b1;
          l_addr  = LOCAL_AW'(dst_beat + i_q);
          l_wdata = crypt_op ? g_blk_out : b_rdata;
        end
      end
      S_TAG: begin
        if (op_q == DMA_ENCRYPT_TRANSFER) begin
          b_req = 1'b1; b_we = 1'b1; b_addr = BANK_AW'(dst_beat + 28'd1);
          b_wdata = g_tag;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      src_q     <= '0;
      dst_q     <= '0;
      size_q    <= '0;
      op_q      <= DMA_NONE;
      key_q     <= 1'b0;
      n_q       <= '0;
      i_q       <= '0;
      iv_q      <= '0;
      tag_q     <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      auth_fail <= 1'b0;
    end else begin
      if (cfg_we && !busy) begin
        unique case (cfg_addr)
          R_DMA_SRC:  src_q  <= cfg_wdata;
          R_DMA_DST:  dst_q  <= cfg_wdata;
          R_DMA_SIZE: size_q <= cfg_wdata;
          R_DMA_CMD: begin
            if (cfg_wdata[2:0] inside {DMA_BANK_TO_LOCAL, DMA_LOCAL_TO_BANK,
                                       DMA_DECRYPT_TRANSFER, DMA_ENCRYPT_TRANSFER}) begin
              op_q      <= dma_op_e'(cfg_wdata[2:0]);
              key_q     <= cfg_wdata[DMA_KEYSEL_BIT];
              n_q       <= size_q[31:4];
              i_q       <= '0;
              busy      <= 1'b1;
              done      <= 1'b0;
              auth_fail <= 1'b0;
              unique case (dma_op_e'(cfg_wdata[2:0]))
                DMA_DECRYPT_TRANSFER: state <= S_HDR_IV;
                DMA_ENCRYPT_TRANSFER: state <= S_GSTART;
                default:              state <= (size_q[31:4] == 28'd0) ? S_DONE : S_RD;
              endcase
            end
          end
          default: ;
        endcase
      end

      unique case (state)
        S_IDLE: ;
        S_HDR_IV:  state <= S_HDR_TAG;
        S_HDR_TAG: begin
          iv_q  <= b_rdata[127:32];
          state <= S_GSTART;
        end
        S_GSTART: begin
          if (op_q == DMA_DECRYPT_TRANSFER) tag_q <= b_rdata;
          state <= S_GWAIT;
        end
        S_GWAIT: begin
          if (g_ready) begin
            if (op_q == DMA_ENCRYPT_TRANSFER) state <= S_WIV;
            else state <= (n_q == 28'd0) ? S_FINAL : S_RD;
          end
        end
        S_WIV: state <= (n_q == 28'd0) ? S_FINAL : S_RD;
        S_RD: begin
          if (crypt_op) state <= S_CRYPT;
          else          state <= S_WR;
        end
        S_CRYPT: state <= S_WR;
        S_WR: begin
          i_q <= i_q + 28'd1;
          if (i_q + 28'd1 == n_q) state <= crypt_op ? S_FINAL : S_DONE;
          else                    state <= S_RD;
        end
        S_FINAL: state <= S_TAG;
        S_TAG: begin
          if (op_q == DMA_DECRYPT_TRANSFER && g_tag != tag_q) auth_fail <= 1'b1;
          state <= S_DONE;
        end
        S_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the block entering the cipher is the word read in the previous cycle
  always_comb begin
    blk_data = to_bank ? l_rdata : b_rdata;
  end

  always_comb begin
    unique case (cfg_addr)
      R_DMA_SRC:    cfg_rdata = src_q;
      R_DMA_DST:    cfg_rdata = dst_q;
      R_DMA_SIZE:   cfg_rdata = size_q;
      R_DMA_STATUS: cfg_rdata = {29'h0, auth_fail, done, busy};
      default:      cfg_rdata = g_cfg_rdata;
    endcase
  end

  // the GCM output and tag are used exactly in the cycle after they were
  // requested
  a_out_in_wr: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WR && crypt_op) |-> g_out_valid);
  a_tag_in_tag: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_TAG) |-> g_tag_valid);

endmodule
