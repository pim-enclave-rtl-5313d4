// aes_gcm_engine: AES-GCM (96-bit IV, no additional data) around one
// single-cycle AES-128 cipher and one single-cycle GHASH multiplier.
//
// It holds the three registers the PIM core configures (data decryption
// key, session key, counter value) and runs one message at a time:
//   start       latch key select and IV; two set-up cycles compute
//               H = E(K, 0) and E(K, J0) with J0 = IV || 0^31 || 1.
//   blk_valid   one 128-bit block per cycle once ready is high: the block is
//               XORed with E(K, IV || ctr) and the ciphertext (the input when
//               decrypting, the output when encrypting) is folded into GHASH.
//               The result appears on blk_out one cycle later (out_valid).
//   final_req   folds in the length block and produces the tag one cycle
//               later (tag_valid); the engine is then idle again.
// The counter-value register supplies the IV when use_counter is set; it
// advances by one after every such message, so a stored IV is never reused.
// A decrypting caller passes the IV read from memory on iv_in instead.
//
// The paper gives the function (AES-GCM, keys and counter exposed as
// registers to the PIM core, one 128-bit block per cycle); the set-up and
// final cycles, the register layout and the counter advance are this
// design's choices. Keys are write-only: reads of their offsets return 0.
module aes_gcm_engine
  import pim_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // configuration registers (word offsets from pim_pkg)
  input  logic         cfg_we,
  input  logic [7:0]   cfg_addr,
  input  logic [31:0]  cfg_wdata,
  output logic [31:0]  cfg_rdata,
  // message control
  input  logic         start,
  input  logic         key_sel,      // 0: data key, 1: session key
  input  logic         use_counter,  // 1: IV from counter register
  input  logic [95:0]  iv_in,
  input  logic         decrypt,
  output logic         ready,
  output logic [95:0]  iv_used,
  // data
  input  logic         blk_valid,
  input  logic [127:0] blk_in,
  output logic         out_valid,
  output logic [127:0] blk_out,
  input  logic         final_req,
  output logic         tag_valid,
  output logic [127:0] tag
);

  typedef enum logic [1:0] {G_IDLE, G_H, G_J0, G_RUN} gstate_e;
  gstate_e state;

  logic [127:0] data_key, sess_key;
  logic [95:0]  counter;
  logic         key_sel_q, use_ctr_q, decrypt_q;
  logic [95:0]  iv_q;
  logic [127:0] h_q, ej0_q, x_q;
  logic [31:0]  ctr_q;
  logic [63:0]  len_q;

  logic [127:0] key, cin, ks, ctext, gin, gout;

  assign key = key_sel_q ? sess_key : data_key;

  always_comb begin
    unique case (state)
      G_H:     cin = '0;
      G_J0:    cin = {iv_q, 32'h1};
      default: cin = {iv_q, ctr_q + 32'h1};
    endcase
  end

  aes128_cipher u_cipher (.key(key), .pt(cin), .ct(ks));

  assign ctext = decrypt_q ? blk_in : (blk_in ^ ks);
  assign gin   = x_q ^ (final_req ? {64'h0, len_q} : ctext);

  gf128_mul u_ghash (.a(gin), .b(h_q), .p(gout));

  assign ready   = (state == G_RUN);
  assign iv_used = iv_q;

  // configuration registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      data_key <= '0;
      sess_key <= '0;
      counter  <= '0;
    end else begin
      if (cfg_we) begin
        if (cfg_addr >= R_DATA_KEY0 && cfg_addr < R_DATA_KEY0 + 8'd4)
          data_key[127 - 32*(cfg_addr - R_DATA_KEY0) -: 32] <= cfg_wdata;
        if (cfg_addr >= R_SESS_KEY0 && cfg_addr < R_SESS_KEY0 + 8'd4)
          sess_key[127 - 32*(cfg_addr - R_SESS_KEY0) -: 32] <= cfg_wdata;
        if (cfg_addr >= R_COUNTER0 && cfg_addr < R_COUNTER0 + 8'd3)
          counter[95 - 32*(cfg_addr - R_COUNTER0) -: 32] <= cfg_wdata;
      end
      if (state == G_RUN && final_req && use_ctr_q)
        counter <= counter + 96'd1;
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg_addr >= R_COUNTER0 && cfg_addr < R_COUNTER0 + 8'd3)
      cfg_rdata = counter[95 - 32*(cfg_addr - R_COUNTER0) -: 32];
  end

  // message sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= G_IDLE;
      key_sel_q <= 1'b0;
      use_ctr_q <= 1'b0;
      decrypt_q <= 1'b0;
      iv_q      <= '0;
      h_q       <= '0;
      ej0_q     <= '0;
      x_q       <= '0;
      ctr_q     <= '0;
      len_q     <= '0;
      out_valid <= 1'b0;
      blk_out   <= '0;
      tag_valid <= 1'b0;
      tag       <= '0;
    end else begin
      out_valid <= 1'b0;
      tag_valid <= 1'b0;
      if (start) begin
        key_sel_q <= key_sel;
        use_ctr_q <= use_counter;
        decrypt_q <= decrypt;
        iv_q      <= use_counter ? counter : iv_in;
        state     <= G_H;
      end else begin
        unique case (state)
          G_IDLE: ;
          G_H: begin
            h_q   <= ks;
            state <= G_J0;
          end
          G_J0: begin
            ej0_q <= ks;
            ctr_q <= 32'h1;
            x_q   <= '0;
            len_q <= '0;
            state <= G_RUN;
          end
          G_RUN: begin
            if (final_req) begin
              tag       <= gout ^ ej0_q;
              tag_valid <= 1'b1;
              state     <= G_IDLE;
            end else if (blk_valid) begin
              blk_out   <= blk_in ^ ks;
              out_valid <= 1'b1;
              x_q       <= gout;
              ctr_q     <= ctr_q + 32'h1;
              len_q     <= len_q + 64'd128;
            end
          end
          default: state <= G_IDLE;
        endcase
      end
    end
  end

  // A block or a final request is only meaningful while a message runs.
  a_blk_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (blk_valid || final_req) |-> ready);
  a_not_both: assert property (@(posedge clk) disable iff (!rst_n)
    !(blk_valid && final_req));

endmodule
