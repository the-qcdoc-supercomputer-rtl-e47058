// tb_qcdoc_asic: end-to-end test of one full-size node chip (12 links, 4 MByte
// EDRAM, no parameter overrides).
//
// The node's links are wired back to itself in pairs, as a two-node torus
// direction would be: the send line of link 2k feeds the receive line of link
// 2k+1 and the other way round. The SCU bus master is connected straight to
// the EDRAM controller's bus slave (standing in for the processor local bus
// and its arbiter), a DDR model answers the EDRAM controller's DMA master, and
// tasks here play the processor on the processor direct bus and the SCU
// register slave. Scenarios:
//   A. gather send: a strided block move on link 0 is received on link 1 into
//      a contiguous buffer; data checked through the processor port;
//   B. credit stall: link 2 sends 16 words (two strided blocks) before link 3's receive DMA is
//      started; the sender must stall on credits, then all words arrive;
//   C. store-and-forward: words sent on link 4 arrive on link 5, are kept
//      locally and forwarded by the passthru to link 6, and arrive on link 7;
//   D. supervisor word on link 8 -> link 9, with interrupt, read and SACK;
//   E. four links at once (contention in the SCU bus arbiter);
//   F. a stored bit flip corrected by the EDRAM ECC;
//   G. EDRAM -> DDR copy by the EDRAM controller's DMA;
//   H. the latency of one word from memory to the neighbour's memory, and of
//      one supervisor word from register to interrupt, against the 550 ns
//      and 350 ns the paper estimates (500 MHz clock).
// Every mechanism is counted and a mechanism that never happened counts as a
// failure. The run is about 16000 clocks.
module tb_qcdoc_asic;
  import qcdoc_pkg::*;
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

  logic [11:0] ser_out, ser_in;
  bus_req_t pdb_req, scu_m_req, scu_s_req, pec_m_req;
  bus_rsp_t pdb_rsp, scu_m_rsp, scu_s_rsp, pec_s_rsp, pec_m_rsp;
  logic pec_dma_start, pec_dma_dir, pec_dma_busy, pec_dma_done, scu_irq;
  logic [31:0] pec_dma_edram_addr, pec_dma_ddr_addr, ecc_corrected, ecc_uncorrectable;
  logic [15:0] pec_dma_count;
  logic [11:0] ev_link_stall, ev_forward;
  logic ev_scu_contention, ev_refresh;
  logic [2:0] ev_pec_hit, ev_pec_miss, ev_pec_prefetch, ev_pec_flush;

  for (genvar k = 0; k < 6; k++) begin : g_loop
    assign ser_in[2*k+1] = ser_out[2*k];
    assign ser_in[2*k]   = ser_out[2*k+1];
  end

  qcdoc_asic dut (
    .clk, .rst_n, .ser_out, .ser_in,
    .pdb_req, .pdb_rsp, .scu_m_req, .scu_m_rsp, .scu_s_req, .scu_s_rsp,
    .pec_s_req(scu_m_req), .pec_s_rsp, .pec_m_req, .pec_m_rsp,
    .pec_dma_start, .pec_dma_dir, .pec_dma_edram_addr, .pec_dma_ddr_addr, .pec_dma_count,
    .pec_dma_busy, .pec_dma_done, .scu_irq, .ecc_corrected, .ecc_uncorrectable,
    .ev_link_stall, .ev_forward, .ev_scu_contention, .ev_refresh,
    .ev_pec_hit, .ev_pec_miss, .ev_pec_prefetch, .ev_pec_flush);
  assign scu_m_rsp = pec_s_rsp;

  // DDR model
  logic [127:0] ddr [logic [31:0]];
  always @(posedge clk) begin
    if (!rst_n) pec_m_rsp <= '0;
    else begin
      pec_m_rsp.ack <= 1'b0;
      if (pec_m_req.valid && !pec_m_rsp.ack) begin
        pec_m_rsp.ack <= 1'b1;
        if (pec_m_req.we) ddr[pec_m_req.addr] = pec_m_req.wdata;
        else pec_m_rsp.rdata <= ddr.exists(pec_m_req.addr) ? ddr[pec_m_req.addr] : '0;
      end
    end
  end

  // mechanism counters
  int n_stall = 0, n_fwd = 0, n_cont = 0, n_ref = 0, n_hit = 0, n_pf = 0, n_flush = 0, n_irq = 0;
  always_ff @(posedge clk) if (rst_n) begin
    n_stall <= n_stall + $countones(ev_link_stall);
    n_fwd   <= n_fwd + $countones(ev_forward);
    n_cont  <= n_cont + int'(ev_scu_contention);
    n_ref   <= n_ref + int'(ev_refresh);
    n_hit   <= n_hit + $countones(ev_pec_hit);
    n_pf    <= n_pf + $countones(ev_pec_prefetch);
    n_flush <= n_flush + $countones(ev_pec_flush);
    n_irq   <= n_irq + int'(scu_irq);
  end

  // processor-side bus transactions; a transfer completes at the clock edge
  // where valid and ack are both high
  logic         pdb_done_q, scu_done_q;
  logic [127:0] pdb_rdat_q, scu_rdat_q;
  always @(posedge clk) begin
    pdb_done_q <= pdb_req.valid && pdb_rsp.ack;
    scu_done_q <= scu_s_req.valid && scu_s_rsp.ack;
    pdb_rdat_q <= pdb_rsp.rdata;
    scu_rdat_q <= scu_s_rsp.rdata;
  end

  task automatic bus(input bit scu, input bit we, input logic [31:0] a, input logic [127:0] wd,
                     input logic [15:0] be, output logic [127:0] rd);
    @(negedge clk);
    if (scu) scu_s_req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: be};
    else     pdb_req   = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: be};
    do @(negedge clk); while (!(scu ? scu_done_q : pdb_done_q));
    rd = scu ? scu_rdat_q : pdb_rdat_q;
    if (scu) scu_s_req = '0; else pdb_req = '0;
  endtask

  logic [127:0] junk;
  task automatic scu_wr(input logic [31:0] a, input logic [127:0] wd);
    bus(1'b1, 1'b1, a, wd, '1, junk);
  endtask
  task automatic scu_rd(input logic [31:0] a, output logic [127:0] rd);
    bus(1'b1, 1'b0, a, '0, '1, rd);
  endtask
  task automatic mem_wr64(input logic [31:0] a, input logic [63:0] d);
    bus(1'b0, 1'b1, a, {d, d}, a[3] ? 16'hFF00 : 16'h00FF, junk);
  endtask
  task automatic mem_rd64(input logic [31:0] a, output logic [63:0] d);
    logic [127:0] rd;
    bus(1'b0, 1'b0, {a[31:4], 4'h0}, '0, '1, rd);
    d = a[3] ? rd[127:64] : rd[63:0];
  endtask

  function automatic logic [127:0] desc(input logic [31:0] a, input int bl, input int st,
                                        input int nb, input bit last);
    dma_desc_t d;
    d = '0;
    d.addr = a; d.blk_len = 16'(bl); d.stride = 32'(st); d.nblk = 16'(nb); d.last = last;
    return 128'(d);
  endfunction

  task automatic start(input logic [23:0] mask);
    scu_wr(32'h2000, {96'h0, 8'h0, mask});
  endtask

  task automatic wait_done(input logic [23:0] mask);
    logic [127:0] st;
    do scu_rd(32'h2010, st); while ((st[64 +: 24] & mask) != mask);
    scu_wr(32'h2010, {40'h0, mask, 64'h0});
  endtask

  function automatic logic [63:0] pat(input logic [31:0] a);
    return {a ^ 32'h5A5A_0000, ~a + 32'h1234};
  endfunction

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ok_n, n_stall0, n_irq0, sup_seen;
  logic [63:0] v;
  logic [127:0] r;
  initial begin
    pdb_req = '0; scu_s_req = '0;
    pec_dma_start = 0; pec_dma_dir = 0; pec_dma_edram_addr = 0; pec_dma_ddr_addr = 0; pec_dma_count = 0;
    // memory cleared as boot software would do
    for (int l = 0; l < 32768; l++) dut.u_edram.mem[l] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (200) @(posedge clk);   // serial links align

    // source data: 4 blocks of 8 words, 0x100 apart, at 0x10000
    for (int b = 0; b < 4; b++)
      for (int w = 0; w < 8; w++) mem_wr64(32'h1_0000 + 32'(b) * 32'h100 + 32'(w) * 8,
                                          pat(32'h1_0000 + 32'(b) * 32'h100 + 32'(w) * 8));

    // A. link 0 gather send -> link 1 receive into 0x20000, interrupt on done
    scu_wr(32'h2040, 128'(1) << 13);
    scu_wr(32'h0000_0000, desc(32'h1_0000, 8, 32'h100, 4, 1'b1));
    scu_wr(32'h0000_0000 + 13 * 32'h100, desc(32'h2_0000, 32, 0, 1, 1'b1));
    n_irq0 = n_irq;
    start(24'h00_2001);
    wait_done(24'h00_2001);
    check(n_irq > n_irq0, "interrupt raised on receive DMA done");
    scu_wr(32'h2040, '0);
    ok_n = 0;
    for (int i = 0; i < 32; i++) begin
      mem_rd64(32'h2_0000 + 32'(i) * 8, v);
      if (v == pat(32'h1_0000 + 32'(i / 8) * 32'h100 + 32'(i % 8) * 8)) ok_n++;
    end
    check(ok_n == 32, $sformatf("A: gathered words received on the neighbour (%0d/32)", ok_n));

    // B. credit stall: link 2 sends 16 words; link 3 receive started late
    scu_wr(32'h0000_0000 + 2 * 32'h100, desc(32'h1_0000, 8, 32'h100, 2, 1'b1));
    scu_wr(32'h0000_0000 + 15 * 32'h100, desc(32'h3_0000, 16, 0, 1, 1'b1));
    n_stall0 = n_stall;
    start(24'h00_0004);
    repeat (2000) @(posedge clk);
    check(n_stall > n_stall0, "B: sender stalls when the receiver's buffer is full");
    start(24'h00_8000);
    wait_done(24'h00_8004);
    ok_n = 0;
    for (int i = 0; i < 16; i++) begin
      mem_rd64(32'h3_0000 + 32'(i) * 8, v);
      if (v == pat(32'h1_0000 + 32'(i / 8) * 32'h100 + 32'(i % 8) * 8)) ok_n++;
    end
    check(ok_n == 16, $sformatf("B: all words arrive after the stall (%0d/16)", ok_n));

    // C. store-and-forward: link 4 -> rx 5 (kept and forwarded) -> tx 6 -> rx 7
    r = '0;
    r[6] = 1'b1;                 // send unit 6 takes the passthru
    r[16 + 4 * 6 +: 4] = 4'd5;   // from receive unit 5
    r[64 + 5] = 1'b1;            // receive unit 5 keeps a local copy
    r[80 + 5] = 1'b1;            // and offers its words to the passthru
    scu_wr(32'h2020, r);
    scu_wr(32'h0000_0000 + 4 * 32'h100, desc(32'h1_0000, 8, 0, 1, 1'b1));
    scu_wr(32'h0000_0000 + 17 * 32'h100, desc(32'h4_0000, 8, 0, 1, 1'b1));
    scu_wr(32'h0000_0000 + 19 * 32'h100, desc(32'h5_0000, 8, 0, 1, 1'b1));
    start(24'h0A_0010);
    wait_done(24'h0A_0010);
    ok_n = 0;
    for (int i = 0; i < 8; i++) begin
      mem_rd64(32'h4_0000 + 32'(i) * 8, v);
      if (v == pat(32'h1_0000 + 32'(i) * 8)) ok_n++;
      mem_rd64(32'h5_0000 + 32'(i) * 8, v);
      if (v == pat(32'h1_0000 + 32'(i) * 8)) ok_n++;
    end
    check(ok_n == 16, $sformatf("C: words kept at the middle node and forwarded (%0d/16)", ok_n));
    check(n_fwd >= 8, "C: passthru forwarded the words");
    scu_wr(32'h2020, '0);

    // D. supervisor word on link 8 -> 9
    scu_wr(32'h2040, 128'(1) << 32);
    scu_wr(32'h3000 + 8 * 32'h10, 128'(64'hC0DE_0000_1234_5678));
    sup_seen = 0;
    for (int t = 0; t < 400 && !scu_irq; t++) @(posedge clk);
    check(scu_irq, "D: supervisor word raises the interrupt");
    scu_rd(32'h2030, r);
    check(r[9], "D: supervisor word waiting on link 9");
    scu_rd(32'h3800 + 9 * 32'h10, r);
    check(r[63:0] == 64'hC0DE_0000_1234_5678, "D: supervisor word value");
    repeat (4) @(posedge clk);
    check(!scu_irq, "D: interrupt clears when the word is read");
    // the SACK frees the sender's supervisor slot: a second word goes through
    scu_wr(32'h3000 + 8 * 32'h10, 128'(64'h2));
    scu_wr(32'h3000 + 8 * 32'h10, 128'(64'h3));   // held until the SACK returns
    for (int t = 0; t < 400 && !scu_irq; t++) @(posedge clk);
    scu_rd(32'h3800 + 9 * 32'h10, r);
    sup_seen += int'(r[63:0] == 64'h2);
    for (int t = 0; t < 600 && !scu_irq; t++) @(posedge clk);
    scu_rd(32'h3800 + 9 * 32'h10, r);
    sup_seen += int'(r[63:0] == 64'h3);
    check(sup_seen == 2, "D: SACK returns the supervisor credit");
    scu_wr(32'h2040, '0);

    // E. four links at once
    for (int l = 0; l < 4; l++) begin
      scu_wr(32'h0000_0000 + 32'(l + 8) * 32'h100, desc(32'h1_0000 + 32'(l) * 32'h100, 8, 0, 1, 1'b1));
      scu_wr(32'h0000_0000 + 32'(12 + (l ^ 1) + 8) * 32'h100, desc(32'h6_0000 + 32'(l) * 32'h100, 8, 0, 1, 1'b1));
    end
    start(24'hF0_0F00);
    wait_done(24'hF0_0F00);
    ok_n = 0;
    for (int l = 0; l < 4; l++)
      for (int i = 0; i < 8; i++) begin
        mem_rd64(32'h6_0000 + 32'(l) * 32'h100 + 32'(i) * 8, v);
        if (v == pat(32'h1_0000 + 32'(l) * 32'h100 + 32'(i) * 8)) ok_n++;
      end
    check(ok_n == 32, $sformatf("E: four simultaneous transfers (%0d/32)", ok_n));
    check(n_cont > 0, "E: SCU bus arbiter saw contention");

    // F. ECC: flip one stored bit of line 0x20000 (flushed long ago)
    repeat (100) @(posedge clk);
    begin
      int c0;
      c0 = int'(ecc_corrected);
      dut.u_edram.mem[32'h2_0000 >> 7][72 * 4 + 9] ^= 1'b1;
      // read via a line far away first so the prefetch registers drop it
      mem_rd64(32'h7_0000, v);
      mem_rd64(32'h7_8000, v);
      mem_rd64(32'h2_0000 + 32'(4) * 8, v);
      check(v == pat(32'h1_0000 + 32'(4) * 8), "F: corrected data returned");
      check(int'(ecc_corrected) == c0 + 1, "F: corrected error counted");
    end

    // G. EDRAM -> DDR copy of the 32 gathered words
    @(negedge clk);
    pec_dma_dir = 1'b0; pec_dma_edram_addr = 32'h2_0000; pec_dma_ddr_addr = 32'h8000_0000;
    pec_dma_count = 16; pec_dma_start = 1'b1;
    @(negedge clk) pec_dma_start = 1'b0;
    wait (pec_dma_done);
    @(negedge clk);
    ok_n = 0;
    for (int q = 0; q < 16; q++)
      if (ddr.exists(32'h8000_0000 + 32'(q) * 16) &&
          ddr[32'h8000_0000 + 32'(q) * 16] ==
          {pat(32'h1_0000 + 32'((2*q+1) / 8) * 32'h100 + 32'((2*q+1) % 8) * 8),
           pat(32'h1_0000 + 32'((2*q) / 8) * 32'h100 + 32'((2*q) % 8) * 8)}) ok_n++;
    check(ok_n == 16, $sformatf("G: EDRAM to DDR copy (%0d/16)", ok_n));

    // H. latency of one word, link 10 -> 11, and of one supervisor word,
    //    from the clock the start (or supervisor) write completes
    scu_wr(32'h0000_0000 + 10 * 32'h100, desc(32'h1_0000, 1, 0, 1, 1'b1));
    scu_wr(32'h0000_0000 + 23 * 32'h100, desc(32'h7_0000, 1, 0, 1, 1'b1));
    start(24'h80_0000);
    start(24'h00_0400);
    begin
      int lat_n, lat_s;
      lat_n = 0;
      while (!dut.u_scu.dma_done[23] && lat_n < 2000) begin
        @(posedge clk);
        lat_n++;
      end
      scu_wr(32'h2040, 128'(1) << 32);
      scu_wr(32'h3000 + 10 * 32'h10, 128'(64'h5));
      lat_s = 0;
      while (!scu_irq && lat_s < 2000) begin
        @(posedge clk);
        lat_s++;
      end
      scu_rd(32'h3800 + 11 * 32'h10, r);
      scu_wr(32'h2040, '0);
      $display("latency: normal word %0d clocks (%0d ns), supervisor word %0d clocks (%0d ns) at 500 MHz",
               lat_n, 2 * lat_n, lat_s, 2 * lat_s);
      check(lat_n < 275, "H: one word memory to memory within 550 ns");
      check(lat_s < 175, "H: supervisor word within 350 ns");
      wait_done(24'h80_0400);
    end

    repeat (200) @(posedge clk);
    $display("mechanisms: stall %0d forward %0d contention %0d refresh %0d pec_hit %0d prefetch %0d flush %0d ecc_corr %0d",
             n_stall, n_fwd, n_cont, n_ref, n_hit, n_pf, n_flush, ecc_corrected);
    check(n_stall > 0, "mechanism: credit stall");
    check(n_fwd > 0, "mechanism: passthru forward");
    check(n_cont > 0, "mechanism: bus arbiter contention");
    check(n_ref > 0, "mechanism: EDRAM refresh");
    check(n_hit > 0, "mechanism: prefetch register hit");
    check(n_pf > 0, "mechanism: prefetch");
    check(n_flush > 0, "mechanism: write-buffer flush");
    check(ecc_corrected > 0, "mechanism: ECC correction");
    check(ecc_uncorrectable == 0, "no uncorrectable ECC errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
