// tb_pec_read_port: self-checking test of one prefetching read port.
//
// A line memory model answers fetches: f_grant is given at random when f_req
// is raised, and the line comes back on f_ret one clock later, as in the
// controller. Snooped writes from three sources update the model and are shown
// to the port on snp_*. The test streams through 16 consecutive lines (all but
// the first line must hit, with a one-clock answer), then runs 4000 random
// reads (some sequential, some random, two interleaved streams) while random
// snooped writes hit the same lines, checking every quadword returned against
// the model.
module tb_pec_read_port;
  localparam int LA_W = 15, NSNP = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic rd_valid, rd_ack, f_req, f_demand, f_grant, f_ret, ev_hit, ev_miss, ev_prefetch;
  logic [LA_W-1:0] rd_line, f_line;
  logic [2:0] rd_qw;
  logic [127:0] rd_data;
  logic [1023:0] f_data;
  logic [NSNP-1:0] snp_valid;
  logic [LA_W-1:0] snp_line [NSNP];
  logic [2:0] snp_qw [NSNP];
  logic [1:0] snp_mask [NSNP];
  logic [127:0] snp_data [NSNP];
  pec_read_port dut (.*);

  logic [1023:0] mem [64];
  logic [1023:0] mem_prev [64];   // the model before the latest edge's snoops
  function automatic logic [1023:0] init_line(input int l);
    logic [1023:0] d;
    for (int i = 0; i < 32; i++) d[32*i +: 32] = {16'(l), 16'(i)};
    return d;
  endfunction

  // fetch side
  logic pend;
  logic [LA_W-1:0] pl;
  logic gnt_en;
  assign f_grant = f_req && gnt_en;
  assign f_ret   = pend;
  assign f_data  = mem[pl[5:0]];
  int n_hit = 0, n_miss = 0, n_pf = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      pend <= 1'b0; pl <= '0;
    end else begin
      pend <= f_grant;
      if (f_grant) pl <= f_line;
      n_hit <= n_hit + int'(ev_hit);
      n_miss <= n_miss + int'(ev_miss);
      n_pf <= n_pf + int'(ev_prefetch);
      // snooped writes take effect in the model at this edge
      mem_prev <= mem;
      for (int s = 0; s < NSNP; s++)
        if (snp_valid[s])
          for (int h = 0; h < 2; h++)
            if (snp_mask[s][h]) mem[snp_line[s][5:0]][128*snp_qw[s] + 64*h +: 64] <= snp_data[s][64*h +: 64];
    end
  end
  always @(negedge clk) gnt_en <= $urandom_range(0, 2) != 0;

  // random snooped writes, driven at negedge, active only when enabled
  bit snoop_on = 0;
  always @(negedge clk) begin
    for (int s = 0; s < NSNP; s++) begin
      snp_valid[s] = snoop_on && $urandom_range(0, 5) == 0;
      snp_line[s]  = LA_W'($urandom_range(0, 63));
      snp_qw[s]    = 3'($urandom);
      snp_mask[s]  = 2'($urandom_range(1, 3));
      snp_data[s]  = {$urandom, $urandom, $urandom, $urandom};
    end
    // two sources never write the same word in one clock
    if (snp_valid[1] && snp_line[1] == snp_line[0]) snp_valid[1] = 1'b0;
    if (snp_valid[2] && (snp_line[2] == snp_line[0] || snp_line[2] == snp_line[1])) snp_valid[2] = 1'b0;
  end

  logic         done_q;
  logic [127:0] rdat_q;
  always @(posedge clk) begin
    done_q <= rd_valid && rd_ack;
    rdat_q <= rd_data;
  end

  int lat;
  task automatic rd(input int l, input int q, input string what);
    logic [127:0] exp;
    @(negedge clk);
    rd_valid = 1'b1; rd_line = LA_W'(l); rd_qw = 3'(q);
    lat = 0;
    do begin
      @(negedge clk);
      lat++;
    end while (!done_q);
    // A read answered at the same edge as a snooped write may return the
    // value before or after that write (the two are concurrent); anything
    // older is stale.
    exp = mem[l][128*q +: 128];
    check(rdat_q == exp || rdat_q == mem_prev[l][128*q +: 128],
          $sformatf("%s: line %0d qw %0d", what, l, q));
    rd_valid = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int slow, h0;
  initial begin
    rd_valid = 0; rd_line = 0; rd_qw = 0;
    for (int l = 0; l < 64; l++) mem[l] = init_line(l);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    slow = 0;
    for (int l = 0; l < 16; l++)
      for (int q = 0; q < 8; q++) begin
        rd(l, q, "stream");
        if (!(l == 0 && q == 0) && lat != 1) slow++;
      end
    check(slow <= 2, $sformatf("streaming reads answered in one clock (%0d slow)", slow));
    check(n_miss <= 2 && n_pf >= 14, $sformatf("stream prefetched (misses %0d prefetches %0d)", n_miss, n_pf));
    snoop_on = 1;
    for (int t = 0; t < 4000; t++) begin
      int l;
      l = (t % 3 == 0) ? $urandom_range(0, 63) : ((t / 8) % 2 == 0 ? 20 + (t / 16) % 20 : 40 + (t / 16) % 20);
      rd(l, $urandom_range(0, 7), "random with snoops");
    end
    $display("hits %0d misses %0d prefetches %0d", n_hit, n_miss, n_pf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
