// tb_scu_arbiter: self-checking test of the SCU DMA bus arbiter.
//
// Twenty-four requesters each ask for a random number of word transfers with
// random read/write and address. A bus slave model answers after a random
// delay, returning on the selected half of the 128-bit bus a value derived
// from the address and checking the byte enables and write data of every
// transfer. The test checks that every request is served exactly once, that
// grants rotate (a requester never waits for more than N-1 others), that read
// data arrives on the right half, and that contention is seen.
module tb_scu_arbiter;
  import qcdoc_pkg::*;
  localparam int N = 24;
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

  logic [N-1:0] req_valid, req_we, ack;
  logic [31:0]  req_addr  [N];
  logic [63:0]  req_wdata [N];
  logic [63:0]  rdata;
  bus_req_t     m_req;
  bus_rsp_t     m_rsp;
  logic         contention;

  scu_arbiter #(.N(N)) dut (.*);

  function automatic logic [63:0] pat(input logic [31:0] a);
    return {~a, a};
  endfunction

  // slave model
  int dly;
  int served_total = 0, bad_bus = 0, n_cont = 0;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_rsp <= '0; dly <= 0;
    end else begin
      m_rsp.ack <= 1'b0;
      if (contention) n_cont <= n_cont + 1;
      if (m_req.valid && !m_rsp.ack) begin
        if (dly == 0) begin
          m_rsp.ack   <= 1'b1;
          m_rsp.rdata <= m_req.addr[3] ? {pat(m_req.addr), 64'h0} : {64'h0, pat(m_req.addr)};
          if (m_req.be != (m_req.addr[3] ? 16'hFF00 : 16'h00FF)) bad_bus <= bad_bus + 1;
          if (m_req.we && (m_req.addr[3] ? m_req.wdata[127:64] : m_req.wdata[63:0]) != ~pat(m_req.addr))
            bad_bus <= bad_bus + 1;
          dly <= int'($urandom_range(0, 2));
        end else dly <= dly - 1;
      end
    end
  end

  // requesters
  int remaining [N];
  int waited [N];
  int max_wait = 0;
  int served [N];
  int bad_rdata = 0;
  for (genvar i = 0; i < N; i++) begin : g_r
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        req_valid[i] <= 1'b0; req_we[i] <= 1'b0; req_addr[i] <= '0; req_wdata[i] <= '0;
        waited[i] <= 0; served[i] <= 0;
      end else begin
        if (req_valid[i] && !ack[i]) waited[i] <= waited[i] + 1;
        if (ack[i]) begin
          served[i] <= served[i] + 1;
          if (!req_we[i] && rdata != pat(req_addr[i])) bad_rdata <= bad_rdata + 1;
          if (waited[i] > max_wait) max_wait <= waited[i];
          waited[i] <= 0;
        end
        if ((!req_valid[i] || ack[i]) && served[i] + int'(ack[i]) + int'(req_valid[i] && !ack[i]) < remaining[i]) begin
          logic [31:0] a;
          a = {$urandom} & 32'hFFFF_FFF8;
          req_valid[i] <= 1'b1;
          req_we[i]    <= 1'($urandom_range(0, 1));
          req_addr[i]  <= a;
          req_wdata[i] <= ~pat(a);
        end else if (ack[i]) req_valid[i] <= 1'b0;
      end
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int total;
  initial begin
    total = 0;
    for (int i = 0; i < N; i++) begin
      remaining[i] = int'($urandom_range(5, 20));
      total += remaining[i];
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (req_valid == '0 && served.sum() == total);
    repeat (3) @(posedge clk);
    for (int i = 0; i < N; i++)
      check(served[i] == remaining[i], $sformatf("requester %0d served %0d of %0d", i, served[i], remaining[i]));
    check(bad_bus == 0, "byte enables and write data on the selected bus half");
    check(bad_rdata == 0, "read data taken from the selected bus half");
    // round robin: each transfer takes at most 1 grant clock + 4 bus clocks, so a
    // requester waits for at most N-1 others
    check(max_wait <= (N - 1) * 5 + 5, $sformatf("longest wait %0d clocks", max_wait));
    check(n_cont > 0, "requests contended");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
