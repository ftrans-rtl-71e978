// tb_transformer_ctrl: the embedding unit and every layer are replaced by
// models that answer a start pulse with a done pulse after a random delay.
// The sequence of start pulses is recorded and compared with the expected
// order (source embedding, encoders, target embedding, decoders, done) for
// a full encoder-decoder run and for an encoder-only run. Also checks that
// no two units ever run at once, that cur_dec names the running decoder and
// that busy covers the whole run.
module tb_transformer_ctrl;
  localparam int NE = 2, ND = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, enc_only, busy, done, emb_start, emb_tgt, emb_done;
  logic [NE-1:0] enc_start, enc_done;
  logic [ND-1:0] dec_start, dec_done;
  logic [$clog2(ND+1)-1:0] cur_dec;

  transformer_ctrl #(.N_ENC(NE), .N_DEC(ND)) dut (.*);

  int ev [$];
  int running = 0, cnt = 0, who = -1, checks = 0, failures = 0;

  always @(posedge clk) begin
    emb_done <= 1'b0; enc_done <= '0; dec_done <= '0;
    if (rst_n) begin
      int starts;
      starts = int'(emb_start) + $countones(enc_start) + $countones(dec_start);
      if (starts > 0) begin
        checks++;
        if (starts > 1 || running != 0) begin failures++; $display("FAIL overlapping start"); end
        running = 1; cnt = int'($urandom_range(1, 6));
        if (emb_start) who = emb_tgt ? 1 : 0;
        for (int k = 0; k < NE; k++) if (enc_start[k]) who = 10 + k;
        for (int k = 0; k < ND; k++) if (dec_start[k]) who = 20 + k;
        ev.push_back(who);
      end else if (running != 0) begin
        if (who >= 20) begin
          checks++;
          if (int'(cur_dec) != who - 20) begin failures++; $display("FAIL cur_dec %0d", cur_dec); end
        end
        checks++;
        if (!busy) begin failures++; $display("FAIL busy low while running"); end
        if (--cnt == 0) begin
          running = 0;
          if (who < 10) emb_done <= 1'b1;
          else if (who < 20) enc_done[who - 10] <= 1'b1;
          else dec_done[who - 20] <= 1'b1;
        end
      end
      if (done) ev.push_back(99);
    end
  end

  task automatic run(input bit eo, input int exp_ev [$]);
    ev.delete();
    @(negedge clk);
    start = 1; enc_only = eo;
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (ev != exp_ev || busy) begin
      failures++;
      $display("FAIL order (enc_only=%0d):", eo);
      foreach (ev[i]) $display("  %0d", ev[i]);
    end
  endtask

  initial begin
    start = 0; enc_only = 0; emb_done = 0; enc_done = '0; dec_done = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1'b0, '{0, 10, 11, 1, 20, 21, 99});
    run(1'b1, '{0, 10, 11, 99});
    run(1'b0, '{0, 10, 11, 1, 20, 21, 99});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
