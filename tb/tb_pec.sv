// tb_pec: self-checking test of the prefetching EDRAM controller with the
// EDRAM model, at the full 4 MByte size.
//
// A reference memory of 64-bit words is kept here. The test
//   1. writes eight lines through the processor port (PDB) and reads them back
//      in order, checking the data, that a read hit is answered one clock
//      after it is presented, and that streaming reads mostly hit thanks to
//      the prefetch of the next line; then reads the same 64 quadwords with
//      the address changing every clock and checks that they take one clock
//      each (8 GByte/s at 500 MHz);
//   2. runs random reads and writes, one at a time, alternating between the
//      PDB and the bus slave port over a small region, so that every read must
//      see the other port's latest write (coherency through write snooping and
//      write-buffer merging);
//   3. runs the two ports at once on separate regions;
//   4. flips one stored bit of a line and checks the read is corrected and
//      counted, then flips two bits of one word and checks it is reported as
//      uncorrectable;
//   5. copies 16 quadwords EDRAM -> DDR and 16 DDR -> EDRAM with the DMA engine
//      against a DDR model, and checks both;
//   6. checks that refresh commands were issued at the set interval.
module tb_pec;
  import qcdoc_pkg::*;
  localparam int LINES = 32768;
  localparam int LA_W  = 15;
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

  bus_req_t req [2];
  bus_rsp_t rsp [2];
  bus_req_t m_req;
  bus_rsp_t m_rsp;
  logic dma_start, dma_dir, dma_busy, dma_done;
  logic [31:0] dma_edram_addr, dma_ddr_addr;
  logic [15:0] dma_count;
  logic e_cmd_valid;
  logic [1:0] e_cmd;
  logic [LA_W-1:0] e_line;
  logic [16*72-1:0] e_wdata, e_rdata;
  logic [15:0] e_wmask;
  logic [31:0] ecc_corrected, ecc_uncorrectable;
  logic ev_refresh;
  logic [2:0] ev_hit, ev_miss, ev_prefetch, ev_flush;

  pec dut (
    .clk, .rst_n, .pdb_req(req[0]), .pdb_rsp(rsp[0]), .slv_req(req[1]), .slv_rsp(rsp[1]),
    .m_req, .m_rsp, .dma_start, .dma_dir, .dma_edram_addr, .dma_ddr_addr, .dma_count,
    .dma_busy, .dma_done, .e_cmd_valid, .e_cmd, .e_line, .e_wdata, .e_wmask, .e_rdata,
    .ecc_corrected, .ecc_uncorrectable, .ev_refresh, .ev_hit, .ev_miss, .ev_prefetch, .ev_flush);

  edram #(.LINES(LINES)) u_edram (
    .clk, .rst_n, .cmd_valid(e_cmd_valid), .cmd(e_cmd), .line(e_line),
    .wdata(e_wdata), .wmask(e_wmask), .rdata(e_rdata));

  // DDR memory model on the DMA's master port
  logic [127:0] ddr [logic [31:0]];
  int ddr_wait;
  always @(posedge clk) begin
    if (!rst_n) begin
      m_rsp <= '0; ddr_wait <= 0;
    end else begin
      m_rsp.ack <= 1'b0;
      if (m_req.valid && !m_rsp.ack) begin
        if (ddr_wait == 0) begin
          m_rsp.ack <= 1'b1;
          if (m_req.we) ddr[m_req.addr] = m_req.wdata;
          else m_rsp.rdata <= ddr.exists(m_req.addr) ? ddr[m_req.addr] : '0;
          ddr_wait <= int'($urandom_range(0, 3));
        end else ddr_wait <= ddr_wait - 1;
      end
    end
  end

  int n_ref = 0, n_hit = 0, n_miss = 0, n_pf = 0, n_flush = 0;
  always_ff @(posedge clk) if (rst_n) begin
    n_ref   <= n_ref + int'(ev_refresh);
    n_hit   <= n_hit + $countones(ev_hit);
    n_miss  <= n_miss + $countones(ev_miss);
    n_pf    <= n_pf + $countones(ev_prefetch);
    n_flush <= n_flush + $countones(ev_flush);
  end

  // reference memory, 64-bit words by byte address
  logic [63:0] refm [logic [31:0]];

  // A transfer completes at the clock edge where valid and ack are both high.
  logic [1:0]   done_q;
  logic [127:0] rdat_q [2];
  always @(posedge clk)
    for (int p = 0; p < 2; p++) begin
      done_q[p] <= req[p].valid && rsp[p].ack;
      rdat_q[p] <= rsp[p].rdata;
    end

  int last_lat;
  task automatic op(input int p, input bit we, input logic [31:0] a, input logic [127:0] wd,
                    output logic [127:0] rd);
    int lat;
    @(negedge clk);
    req[p].valid = 1'b1;
    req[p].we    = we;
    req[p].addr  = a;
    req[p].wdata = wd;
    req[p].be    = '1;
    lat = 0;
    do begin
      @(negedge clk);
      lat++;
    end while (!done_q[p]);
    rd = rdat_q[p];
    req[p].valid = 1'b0;
    last_lat = lat;
  endtask

  task automatic wr(input int p, input logic [31:0] a, input logic [127:0] wd);
    logic [127:0] rd;
    op(p, 1'b1, a, wd, rd);
    refm[a]     = wd[63:0];
    refm[a + 8] = wd[127:64];
  endtask

  task automatic rd_check(input int p, input logic [31:0] a, input string what);
    logic [127:0] rd;
    op(p, 1'b0, a, '0, rd);
    check(rd == {refm[a + 8], refm[a]}, $sformatf("%s: read %h port %0d", what, a, p));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hit_lat_ok, h0, m0;
  int cyc0;
  logic [127:0] rd;
  initial begin
    for (int p = 0; p < 2; p++) req[p] = '0;
    // memory cleared as boot software would do; all-zero words are valid code words
    for (int l = 0; l < LINES; l++) u_edram.mem[l] = '0;
    dma_start = 0; dma_dir = 0; dma_edram_addr = 0; dma_ddr_addr = 0; dma_count = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. sequential write then streaming read
    for (int q = 0; q < 64; q++) wr(0, 32'h0000_1000 + 32'(q) * 16, {$urandom, $urandom, $urandom, $urandom});
    repeat (20) @(posedge clk);
    h0 = n_hit; m0 = n_miss;
    hit_lat_ok = 1;
    for (int q = 0; q < 64; q++) begin
      rd_check(0, 32'h0000_1000 + 32'(q) * 16, "stream");
      if (q % 8 != 0 && last_lat != 1) hit_lat_ok = 0;
    end
    check(hit_lat_ok == 1, "read hits answered one clock after the request");
    // back-to-back stream: the address changes every clock
    begin
      int ok_n, cyc;
      ok_n = 0; cyc = 0;
      @(negedge clk);
      req[0].valid = 1'b1; req[0].we = 1'b0; req[0].be = '1;
      for (int q = 0; q < 64; q++) begin
        req[0].addr = 32'h0000_1000 + 32'(q) * 16;
        do begin
          @(negedge clk);
          cyc++;
        end while (!done_q[0]);
        if (rdat_q[0] == {refm[req[0].addr + 8], refm[req[0].addr]}) ok_n++;
      end
      req[0].valid = 1'b0;
      check(ok_n == 64, "back-to-back stream data");
      check(cyc <= 64 + 4, $sformatf("back-to-back stream at one quadword per clock (%0d clocks for 64)", cyc));
    end
    check(n_miss - m0 <= 2 && n_hit - h0 >= 62,
          $sformatf("streaming reads hit the prefetched lines (hits %0d misses %0d)", n_hit - h0, n_miss - m0));

    // 2. coherency between the two ports on a shared region
    for (int q = 0; q < 64; q++) wr(1, 32'h0000_8000 + 32'(q) * 16, {$urandom, $urandom, $urandom, $urandom});
    for (int t = 0; t < 1500; t++) begin
      int p;
      logic [31:0] a;
      p = t % 2;
      a = 32'h0000_8000 + 32'($urandom_range(0, 63)) * 16;
      if ($urandom_range(0, 2) == 0) wr(p, a, {$urandom, $urandom, $urandom, $urandom});
      else rd_check(p, a, "shared");
    end

    // 3. both ports at once on separate regions
    fork
      for (int t = 0; t < 600; t++) begin
        logic [31:0] a;
        a = 32'h0001_0000 + 32'($urandom_range(0, 63)) * 16;
        if (t < 64) wr(0, 32'h0001_0000 + 32'(t) * 16, {$urandom, $urandom, $urandom, $urandom});
        else if ($urandom_range(0, 2) == 0) wr(0, a, {$urandom, $urandom, $urandom, $urandom});
        else rd_check(0, a, "parallel pdb");
      end
      for (int t = 0; t < 600; t++) begin
        logic [31:0] a;
        a = 32'h0002_0000 + 32'($urandom_range(0, 63)) * 16;
        if (t < 64) wr(1, 32'h0002_0000 + 32'(t) * 16, {$urandom, $urandom, $urandom, $urandom});
        else if ($urandom_range(0, 2) == 0) wr(1, a, {$urandom, $urandom, $urandom, $urandom});
        else rd_check(1, a, "parallel slave");
      end
    join

    // 4. ECC: lines 0x300 and 0x304 written via the slave port, flushed, then
    //    corrupted (0x304 is not the line after 0x300, so it is not prefetched)
    for (int q = 0; q < 8; q++) wr(1, 32'h0001_8000 + 32'(q) * 16, {$urandom, $urandom, $urandom, $urandom});
    for (int q = 0; q < 8; q++) wr(1, 32'h0001_8200 + 32'(q) * 16, {$urandom, $urandom, $urandom, $urandom});
    wr(1, 32'h0003_0000, '1);          // moves the slave's write buffers on
    repeat (50) @(posedge clk);
    begin
      int c0, u0;
      c0 = int'(ecc_corrected); u0 = int'(ecc_uncorrectable);
      u_edram.mem[32'h0001_8000 >> 7][72 * 3 + 17] ^= 1'b1;
      rd_check(0, 32'h0001_8000 + 32'd16, "single-bit error corrected");
      check(int'(ecc_corrected) == c0 + 1, "corrected error counted");
      u_edram.mem[32'h0001_8200 >> 7][72 * 5 + 2] ^= 1'b1;
      u_edram.mem[32'h0001_8200 >> 7][72 * 5 + 40] ^= 1'b1;
      op(0, 1'b0, 32'h0001_8200 + 32'd32, '0, rd);
      check(int'(ecc_uncorrectable) == u0 + 1, $sformatf("double-bit error reported (%0d -> %0d, corrected %0d)", u0, ecc_uncorrectable, ecc_corrected));
    end

    // 5. DMA EDRAM -> DDR, then DDR -> EDRAM
    @(negedge clk);
    dma_dir = 1'b0; dma_edram_addr = 32'h0000_8000; dma_ddr_addr = 32'h4000_0000; dma_count = 16;
    dma_start = 1'b1;
    @(negedge clk) dma_start = 1'b0;
    wait (dma_done);
    @(negedge clk);
    for (int q = 0; q < 16; q++)
      check(ddr[32'h4000_0000 + 32'(q) * 16] == {refm[32'h8000 + 32'(q) * 16 + 8], refm[32'h8000 + 32'(q) * 16]},
            $sformatf("DMA to DDR quadword %0d", q));
    for (int q = 0; q < 16; q++) begin
      logic [127:0] v;
      v = {$urandom, $urandom, $urandom, $urandom};
      ddr[32'h5000_0000 + 32'(q) * 16] = v;
      refm[32'h0002_8000 + 32'(q) * 16]     = v[63:0];
      refm[32'h0002_8000 + 32'(q) * 16 + 8] = v[127:64];
    end
    @(negedge clk);
    dma_dir = 1'b1; dma_edram_addr = 32'h0002_8000; dma_ddr_addr = 32'h5000_0000; dma_count = 16;
    dma_start = 1'b1;
    @(negedge clk) dma_start = 1'b0;
    wait (dma_done);
    for (int q = 0; q < 16; q++) rd_check(0, 32'h0002_8000 + 32'(q) * 16, "DMA from DDR");

    // 6. refresh and mechanism counts
    cyc0 = n_ref;
    repeat (128 * 10) @(posedge clk);
    check(n_ref - cyc0 >= 9 && n_ref - cyc0 <= 11, $sformatf("refresh every 128 clocks (%0d)", n_ref - cyc0));
    check(n_pf > 0 && n_flush > 0, "prefetches and write-buffer flushes happened");
    check(ecc_corrected == 1 && ecc_uncorrectable == 1, "no ECC events other than the injected ones");
    $display("pec: hits %0d misses %0d prefetches %0d flushes %0d refreshes %0d",
             n_hit, n_miss, n_pf, n_flush, n_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
