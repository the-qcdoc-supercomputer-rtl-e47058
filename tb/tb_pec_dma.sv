// tb_pec_dma: self-checking test of the EDRAM <-> DDR DMA engine.
//
// Two memory models with random response delays stand in for the EDRAM port
// and the DDR bus. The test copies 24 quadwords EDRAM -> DDR and 40 quadwords
// DDR -> EDRAM, checks every destination quadword against the source, checks
// that no access falls outside the given ranges, that busy covers the copy and
// done pulses once per copy, and that a start while busy is ignored.
module tb_pec_dma;
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

  logic start, dir, busy, done;
  logic [31:0] edram_addr, ddr_addr;
  logic [15:0] count;
  bus_req_t e_req, m_req;
  bus_rsp_t e_rsp, m_rsp;
  pec_dma dut (.*);

  logic [127:0] emem [logic [31:0]];
  logic [127:0] dmem [logic [31:0]];
  int n_done = 0, n_bad = 0, ew, mw;

  always @(posedge clk) begin
    if (!rst_n) begin
      e_rsp <= '0; m_rsp <= '0; ew <= 0; mw <= 0;
    end else begin
      n_done <= n_done + int'(done);
      e_rsp.ack <= 1'b0;
      m_rsp.ack <= 1'b0;
      if (e_req.valid && !e_rsp.ack) begin
        if (ew == 0) begin
          e_rsp.ack <= 1'b1;
          if (e_req.addr[3:0] != 0 || (e_req.we && e_req.be != '1)) n_bad <= n_bad + 1;
          if (e_req.we) emem[e_req.addr] = e_req.wdata;
          else e_rsp.rdata <= emem.exists(e_req.addr) ? emem[e_req.addr] : 'x;
          ew <= $urandom_range(0, 3);
        end else ew <= ew - 1;
      end
      if (m_req.valid && !m_rsp.ack) begin
        if (mw == 0) begin
          m_rsp.ack <= 1'b1;
          if (m_req.addr[3:0] != 0) n_bad <= n_bad + 1;
          if (m_req.we) dmem[m_req.addr] = m_req.wdata;
          else m_rsp.rdata <= dmem.exists(m_req.addr) ? dmem[m_req.addr] : 'x;
          mw <= $urandom_range(0, 5);
        end else mw <= mw - 1;
      end
    end
  end

  task automatic copy(input bit d, input logic [31:0] ea, input logic [31:0] da, input int n);
    @(negedge clk);
    start = 1'b1; dir = d; edram_addr = ea; ddr_addr = da; count = 16'(n);
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy after start");
    repeat (3) @(negedge clk);
    start = 1'b1; edram_addr = 32'hDEAD_0000;      // ignored while busy
    @(negedge clk);
    start = 1'b0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; dir = 0; edram_addr = 0; ddr_addr = 0; count = 0;
    for (int q = 0; q < 24; q++) emem[32'h0001_0000 + 32'(q) * 16] = {$urandom, $urandom, $urandom, $urandom};
    for (int q = 0; q < 40; q++) dmem[32'h8000_0000 + 32'(q) * 16] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    copy(1'b0, 32'h0001_0000, 32'h9000_0000, 24);
    for (int q = 0; q < 24; q++)
      check(dmem.exists(32'h9000_0000 + 32'(q) * 16) &&
            dmem[32'h9000_0000 + 32'(q) * 16] === emem[32'h0001_0000 + 32'(q) * 16],
            $sformatf("EDRAM->DDR quadword %0d", q));
    check(!dmem.exists(32'h9000_0000 + 32'd24 * 16), "no write beyond the count");
    copy(1'b1, 32'h0002_0000, 32'h8000_0000, 40);
    for (int q = 0; q < 40; q++)
      check(emem.exists(32'h0002_0000 + 32'(q) * 16) &&
            emem[32'h0002_0000 + 32'(q) * 16] === dmem[32'h8000_0000 + 32'(q) * 16],
            $sformatf("DDR->EDRAM quadword %0d", q));
    check(!emem.exists(32'h0002_0000 + 32'd40 * 16), "no write beyond the count");
    check(!emem.exists(32'hDEAD_0000) && !dmem.exists(32'hDEAD_0000), "start while busy ignored");
    check(n_done == 2, $sformatf("one done pulse per copy (%0d)", n_done));
    check(n_bad == 0, "accesses aligned and whole");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
