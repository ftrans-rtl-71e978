// transformer_ctrl: top-level sequencer of the accelerator.
//
// On start it runs one inference:
//   EMB_SRC  embedding lookup of the n_src source tokens
//   ENC k    encoder layer k, k = 0 .. N_ENC-1 (each reads the previous
//            layer's buffer; the last one fills the encoder-to-decoder
//            buffer)
//   EMB_TGT  embedding lookup of the n_tgt target tokens
//   DEC k    decoder layer k, k = 0 .. N_DEC-1
// and pulses done. With enc_only set (encoder-only models such as a
// classifier) the decoder phases are skipped and the result is the encoder
// output. Every unit is started with a one-clock pulse and answers with a
// one-clock done pulse.
//
// The controller that talks to the host and orders embedding lookup, encoder
// stack and decoder stack follows the paper. The command interface, the
// enc_only mode bit and running the layers strictly one after another (no
// coarse-grained pipelining across sentences) are this design's choices.
module transformer_ctrl #(
  parameter int N_ENC = 2,
  parameter int N_DEC = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             enc_only,
  output logic             busy,
  output logic             done,
  output logic             emb_start,
  output logic             emb_tgt,     // 0: source sentence, 1: target sentence
  input  logic             emb_done,
  output logic [N_ENC-1:0] enc_start,
  input  logic [N_ENC-1:0] enc_done,
  output logic [N_DEC-1:0] dec_start,
  input  logic [N_DEC-1:0] dec_done,
  output logic [$clog2(N_DEC+1)-1:0] cur_dec   // decoder layer running
);
  typedef enum logic [2:0] {S_IDLE, S_EMB_SRC, S_ENC, S_EMB_TGT, S_DEC} state_t;
  state_t state;

  logic [$clog2(N_ENC+1)-1:0] k_enc;
  logic [$clog2(N_DEC+1)-1:0] k_dec;
  logic                       mode_enc_only;

  assign busy    = (state != S_IDLE);
  assign cur_dec = k_dec;
  assign emb_tgt = (state == S_EMB_TGT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      k_enc         <= '0;
      k_dec         <= '0;
      mode_enc_only <= 1'b0;
      emb_start     <= 1'b0;
      enc_start     <= '0;
      dec_start     <= '0;
      done          <= 1'b0;
    end else begin
      emb_start <= 1'b0;
      enc_start <= '0;
      dec_start <= '0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_enc_only <= enc_only;
          k_enc         <= '0;
          k_dec         <= '0;
          emb_start     <= 1'b1;
          state         <= S_EMB_SRC;
        end
        S_EMB_SRC: if (emb_done) begin
          enc_start[0] <= 1'b1;
          state        <= S_ENC;
        end
        S_ENC: if (enc_done[k_enc]) begin
          if (int'(k_enc) != N_ENC - 1) begin
            k_enc                <= k_enc + 1'b1;
            enc_start[k_enc + 1] <= 1'b1;
          end else if (mode_enc_only) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            emb_start <= 1'b1;
            state     <= S_EMB_TGT;
          end
        end
        S_EMB_TGT: if (emb_done) begin
          dec_start[0] <= 1'b1;
          state        <= S_DEC;
        end
        S_DEC: if (dec_done[k_dec]) begin
          if (int'(k_dec) != N_DEC - 1) begin
            k_dec                <= k_dec + 1'b1;
            dec_start[k_dec + 1] <= 1'b1;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
