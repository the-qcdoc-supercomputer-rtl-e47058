// tb_hssl: self-checking test of the serial link macro model.
//
// The four send ports of one macro are looped to its four receive ports, port
// p to port 3-p, with a different wire delay on each. Random bytes are offered
// at every tx_take. The test checks that each receiver first delivers the
// alignment byte, then every byte in order, one byte per 8 clocks (one bit per
// clock, 500 Mbit/s at 500 MHz), and that the bytes appear 9 clocks after
// they were taken plus the wire delay (8 bit times plus one clock in the
// receiver).
module tb_hssl;
  localparam int P = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]   tx_byte [P], rx_byte [P];
  logic [P-1:0] tx_take, ser_out, ser_in, rx_valid;

  hssl #(.PORTS(P)) dut (.*);

  // wires with delays of 0..3 clocks
  logic [3:0] dl [P];
  for (genvar p = 0; p < P; p++) begin : g_w
    always_ff @(posedge clk) dl[p] <= {dl[p][2:0], ser_out[p]};
    assign ser_in[3-p] = p == 0 ? ser_out[p] : dl[p][p-1];
  end

  longint cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  logic [7:0] sent [P][$];
  longint     sent_t [P][$];
  longint     last_rx [P];
  int         n_rx [P];
  for (genvar p = 0; p < P; p++) begin : g_p
    always_ff @(posedge clk) begin
      if (tx_take[p]) begin
        sent[p].push_back(tx_byte[p]);
        sent_t[p].push_back(cyc);
        tx_byte[p] <= 8'($urandom);
      end
      if (rst_n && rx_valid[3-p]) begin
        n_rx[p] <= n_rx[p] + 1;
        checks++;
        if (n_rx[p] == 0) begin
          if (rx_byte[3-p] != 8'hF0) begin failures++; $display("FAIL: port %0d alignment byte", p); end
        end else begin
          logic [7:0] e;
          longint t;
          e = sent[p].pop_front();
          t = sent_t[p].pop_front();
          if (rx_byte[3-p] != e) begin failures++; $display("FAIL: port %0d byte %0d", p, n_rx[p]); end
          checks++;
          if (cyc - t != 64'(9 + p)) begin
            failures++; $display("FAIL: port %0d latency %0d", p, cyc - t);
          end
          checks++;
          if (n_rx[p] > 1 && cyc - last_rx[p] != 8) begin failures++; $display("FAIL: port %0d rate", p); end
        end
        last_rx[p] <= cyc;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < P; p++) begin
      tx_byte[p] = 8'($urandom); n_rx[p] = 0; dl[p] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (8 * 200) @(posedge clk);
    for (int p = 0; p < P; p++) begin
      checks++;
      if (n_rx[p] < 190) begin failures++; $display("FAIL: port %0d received only %0d", p, n_rx[p]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
