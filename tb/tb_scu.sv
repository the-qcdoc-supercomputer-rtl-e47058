// tb_scu: self-checking test of the serial communications unit on its own
// (12 links, full size).
//
// The serial macros are replaced by a byte-level loop: every 8 clocks each
// link's send byte is taken and handed to the receive side of the partner
// link (2k <-> 2k+1) one clock later. A 128-bit memory model with random delay
// answers the SCU's bus master; tasks play the processor on the register
// slave. The test checks: register read-back (PASS, IRQEN); a strided send on
// link 0 received contiguously on link 1, with the done interrupt; all 12
// links sending at once (24 DMA engines sharing the master port, so the
// arbiter must see contention); the passthru (link 2 -> 3 forwarded to 4 ->
// 5, with a local copy on 3); a supervisor word with its interrupt and SACK;
// and a corrupted byte on the line, which must set the parity error bit.
module tb_scu;
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

  logic [7:0] tx_byte [12], rx_byte [12];
  logic [11:0] tx_take, rx_valid, ev_stall, ev_forward;
  bus_req_t m_req, s_req;
  bus_rsp_t m_rsp, s_rsp;
  logic irq, ev_contention;
  scu dut (.*);

  // byte loop between link pairs, with an optional single-bit corruption
  int cyc = 0;
  int corrupt_link = -1;
  always @(posedge clk) cyc <= cyc + 1;
  assign tx_take = (rst_n && cyc % 8 == 0) ? '1 : '0;
  always @(posedge clk) begin
    if (!rst_n) rx_valid <= '0;
    else begin
      rx_valid <= tx_take;
      for (int l = 0; l < 12; l++) begin
        rx_byte[l ^ 1] <= tx_byte[l] ^ ((tx_take[l] && corrupt_link == l && tx_byte[l] != 0) ? 8'h01 : 8'h00);
        if (tx_take[l] && corrupt_link == l && tx_byte[l] != 0) corrupt_link = -1;
      end
    end
  end

  // memory model
  logic [63:0] mem [logic [31:0]];
  int mw;
  always @(posedge clk) begin
    if (!rst_n) begin
      m_rsp <= '0; mw <= 0;
    end else begin
      m_rsp.ack <= 1'b0;
      if (m_req.valid && !m_rsp.ack) begin
        if (mw == 0) begin
          logic [31:0] a;
          a = {m_req.addr[31:4], 4'h0};
          m_rsp.ack <= 1'b1;
          if (m_req.we) begin
            if (m_req.be[7:0] == 8'hFF)  mem[a]     = m_req.wdata[63:0];
            if (m_req.be[15:8] == 8'hFF) mem[a + 8] = m_req.wdata[127:64];
          end else m_rsp.rdata <= {mem.exists(a + 8) ? mem[a + 8] : 64'h0, mem.exists(a) ? mem[a] : 64'h0};
          mw <= $urandom_range(0, 2);
        end else mw <= mw - 1;
      end
    end
  end

  int n_stall = 0, n_fwd = 0, n_cont = 0;
  always_ff @(posedge clk) if (rst_n) begin
    n_stall <= n_stall + $countones(ev_stall);
    n_fwd   <= n_fwd + $countones(ev_forward);
    n_cont  <= n_cont + int'(ev_contention);
  end

  task automatic sbus(input bit we, input logic [31:0] a, input logic [127:0] wd, output logic [127:0] rd);
    @(negedge clk);
    s_req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: '1};
    do @(negedge clk); while (!s_rsp.ack);
    rd = s_rsp.rdata;
    s_req = '0;
  endtask
  logic [127:0] junk;
  task automatic wr(input logic [31:0] a, input logic [127:0] wd);
    sbus(1'b1, a, wd, junk);
  endtask
  task automatic rd(input logic [31:0] a, output logic [127:0] r);
    sbus(1'b0, a, '0, r);
  endtask

  function automatic logic [127:0] desc(input logic [31:0] a, input int bl, input int st,
                                        input int nb, input bit last);
    dma_desc_t d;
    d = '0;
    d.addr = a; d.blk_len = 16'(bl); d.stride = 32'(st); d.nblk = 16'(nb); d.last = last;
    return 128'(d);
  endfunction

  task automatic run(input logic [23:0] mask);
    logic [127:0] st;
    wr(32'h2000, {104'h0, mask});
    do rd(32'h2010, st); while ((st[64 +: 24] & mask) != mask);
    wr(32'h2010, {40'h0, mask, 64'h0});
  endtask

  function automatic logic [63:0] pat(input logic [31:0] a);
    return {~a, a ^ 32'h3C3C_0000};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] r, pc;
  int ok_n, irq_seen;
  initial begin
    s_req = '0;
    for (int i = 0; i < 1024; i++) mem[32'h1_0000 + 32'(i) * 8] = pat(32'h1_0000 + 32'(i) * 8);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // registers
    pc = '0;
    pc[4] = 1'b1; pc[16 + 4 * 4 +: 4] = 4'd3; pc[64 + 3] = 1'b1; pc[80 + 3] = 1'b1;
    wr(32'h2020, pc);
    rd(32'h2020, r);
    check(r == pc, "PASS register reads back");
    wr(32'h2040, 128'(1) << 13);
    rd(32'h2040, r);
    check(r[23:0] == 24'h00_2000 && !r[32], "IRQEN register reads back");

    // strided send link 0 -> receive link 1, interrupt on channel 13 done
    wr(32'h0000, desc(32'h1_0000, 4, 32'h80, 6, 1'b1));
    wr(32'h0D00, desc(32'h4_0000, 24, 0, 1, 1'b1));
    irq_seen = 0;
    fork
      run(24'h00_2001);
      begin
        for (int t = 0; t < 20000 && !irq; t++) @(posedge clk);
        irq_seen = irq;
      end
    join
    check(irq_seen == 1, "done interrupt");
    wr(32'h2040, '0);
    ok_n = 0;
    for (int i = 0; i < 24; i++)
      if (mem.exists(32'h4_0000 + 32'(i) * 8) &&
          mem[32'h4_0000 + 32'(i) * 8] == pat(32'h1_0000 + 32'(i / 4) * 32'h80 + 32'(i % 4) * 8)) ok_n++;
    check(ok_n == 24, $sformatf("strided send received (%0d/24)", ok_n));

    // passthru: 2 -> 3 (kept) -> forwarded on 4 -> 5
    wr(32'h0200, desc(32'h1_0400, 8, 0, 1, 1'b1));
    wr(32'h0F00, desc(32'h5_0000, 8, 0, 1, 1'b1));
    wr(32'h1100, desc(32'h5_1000, 8, 0, 1, 1'b1));
    run(24'h2_8004);
    ok_n = 0;
    for (int i = 0; i < 8; i++) begin
      if (mem.exists(32'h5_0000 + 32'(i) * 8) && mem[32'h5_0000 + 32'(i) * 8] == pat(32'h1_0400 + 32'(i) * 8)) ok_n++;
      if (mem.exists(32'h5_1000 + 32'(i) * 8) && mem[32'h5_1000 + 32'(i) * 8] == pat(32'h1_0400 + 32'(i) * 8)) ok_n++;
    end
    check(ok_n == 16, $sformatf("passthru forwarded and kept (%0d/16)", ok_n));
    check(n_fwd == 8, $sformatf("8 words forwarded (%0d)", n_fwd));
    wr(32'h2020, '0);

    // all 12 links at once, 32 words each
    for (int l = 0; l < 12; l++) begin
      wr(32'(l) * 32'h100, desc(32'h1_0000 + 32'(l) * 32'h200, 32, 0, 1, 1'b1));
      wr(32'(12 + (l ^ 1)) * 32'h100, desc(32'h6_0000 + 32'(l) * 32'h200, 32, 0, 1, 1'b1));
    end
    run(24'hFF_FFFF);
    ok_n = 0;
    for (int l = 0; l < 12; l++)
      for (int i = 0; i < 32; i++)
        if (mem.exists(32'h6_0000 + 32'(l) * 32'h200 + 32'(i) * 8) &&
            mem[32'h6_0000 + 32'(l) * 32'h200 + 32'(i) * 8] == pat(32'h1_0000 + 32'(l) * 32'h200 + 32'(i) * 8)) ok_n++;
    check(ok_n == 384, $sformatf("12 links at once (%0d/384)", ok_n));
    check(n_cont > 0, "bus arbiter contention seen");

    // supervisor word 6 -> 7
    wr(32'h2040, 128'(1) << 32);
    wr(32'h3060, 128'(64'hFACE_0000_0000_0007));
    for (int t = 0; t < 400 && !irq; t++) @(posedge clk);
    check(irq, "supervisor interrupt");
    rd(32'h2030, r);
    check(r[11:0] == 12'h080, "supervisor word waiting on link 7 only");
    rd(32'h3870, r);
    check(r[63:0] == 64'hFACE_0000_0000_0007, "supervisor word value");
    repeat (3) @(posedge clk);
    check(!irq, "interrupt drops after the read");
    wr(32'h2040, '0);

    // a corrupted byte on link 8 -> 9
    wr(32'h0800, desc(32'h1_0000, 4, 0, 1, 1'b1));
    wr(32'h1500, desc(32'h7_0000, 4, 0, 1, 1'b1));
    @(negedge clk) corrupt_link = 8;   // the next non-idle byte sent on link 8
    run(24'h20_0100);
    rd(32'h2030, r);
    check(r[16 + 9] && r[27:16] == 12'h200, "parity error flagged on link 9");
    wr(32'h2030, {84'h0, 12'hFFF, 4'h0, 12'hFFF, 16'h0});
    rd(32'h2030, r);
    check(r[43:16] == '0, "error bits clear on write");

    $display("stall %0d forward %0d contention %0d", n_stall, n_fwd, n_cont);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
