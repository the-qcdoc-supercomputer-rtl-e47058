// tb_scu_passthru: self-checking test of the SCU passthru crossbar.
//
// Random configurations of source selects and enables are applied together
// with random valid and ready bits, and every output is compared with a
// reference computed here: a send unit j gets the word of the link it selects
// when that link is valid and every send unit selecting that link is ready; a
// receive link is ready only when it has at least one target and all its
// targets are ready. Broadcast (one link to several send units) is forced to
// occur.
module tb_scu_passthru;
  localparam int N = 12;
  int checks = 0, failures = 0;

  logic [63:0]  rec_word [N], snd_word [N];
  logic [N-1:0] rec_valid, rec_ready, snd_valid, snd_ready, en, forwarded;
  logic [3:0]   src_sel [N];

  scu_passthru #(.N(N)) dut (.*);

  int n_bcast = 0, n_fwd = 0;
  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) begin
        rec_word[i] = {$urandom, $urandom};
        src_sel[i]  = 4'($urandom_range(0, t % 2 == 0 ? 3 : N - 1));
      end
      rec_valid = N'($urandom);
      snd_ready = N'($urandom) | N'($urandom);
      en        = N'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        int ntgt;
        bit all_rdy;
        ntgt = 0; all_rdy = 1;
        for (int j = 0; j < N; j++)
          if (en[j] && src_sel[j] == 4'(i)) begin
            ntgt++;
            if (!snd_ready[j]) all_rdy = 0;
          end
        checks++;
        if (rec_ready[i] != (ntgt > 0 && all_rdy)) begin
          failures++;
          $display("FAIL: t=%0d rec_ready[%0d]", t, i);
        end
        if (ntgt > 1 && rec_valid[i] && rec_ready[i]) n_bcast++;
        if (forwarded[i]) n_fwd++;
      end
      for (int j = 0; j < N; j++) begin
        bit exp_v;
        exp_v = en[j] && rec_valid[src_sel[j]] && rec_ready[src_sel[j]];
        checks++;
        if (snd_valid[j] != exp_v || (exp_v && snd_word[j] != rec_word[src_sel[j]])) begin
          failures++;
          $display("FAIL: t=%0d send unit %0d", t, j);
        end
      end
    end
    checks++;
    if (n_bcast == 0 || n_fwd == 0) begin
      failures++;
      $display("FAIL: broadcast never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
