// hssl: behavioural model of a high-speed serial link macro (kind:
// behavioural model; the real part is a library macro whose insides are not
// published).
//
// What the model keeps from the real part: each macro has PORTS send and
// PORTS receive ports, and each port moves one bit per clock (500 Mbit/s at
// the 500 MHz core clock); bytes are converted to bits on the way out and
// back to bytes on the way in. What it invents: the byte framing. After reset
// a transmitter holds its line at 0, then sends continuously, most significant
// bit first, starting with one alignment byte whose top bit is 1. The receiver
// takes the first 1 it sees as bit 7 of the first byte and from then on cuts
// the bit stream into bytes every 8 clocks. There is no clock recovery: both
// ends run on one clock, which is all a simulation needs.
//
// Interface, per port p:
//   tx_byte[p]  byte the send unit offers; taken in the cycle tx_take[p] = 1
//               (once every 8 clocks), so it must always hold a valid byte
//               (the send unit offers an idle header when it has nothing).
//   ser_out[p]  serial line out;  ser_in[p] serial line in.
//   rx_byte[p], rx_valid[p]  one received byte per 8 clocks once aligned.
// Timing: a byte taken at tx_take leaves as bits in the next 8 clocks and is
// presented by a directly connected receiver 9 clocks after it was taken.
module hssl #(
  parameter int unsigned PORTS = 4,
  parameter logic [7:0]  SYNC_BYTE = 8'hF0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       tx_byte  [PORTS],
  output logic [PORTS-1:0] tx_take,
  output logic [PORTS-1:0] ser_out,
  input  logic [PORTS-1:0] ser_in,
  output logic [7:0]       rx_byte  [PORTS],
  output logic [PORTS-1:0] rx_valid
);

  for (genvar p = 0; p < PORTS; p++) begin : g_port
    logic [7:0] tx_sh;
    logic [2:0] tx_cnt;
    logic       tx_run;
    logic [7:0] rx_sh;
    logic [2:0] rx_cnt;
    logic       rx_lock;

    assign ser_out[p] = tx_run & tx_sh[7];
    assign tx_take[p] = tx_run && tx_cnt == 3'd7;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        tx_sh  <= SYNC_BYTE;
        tx_cnt <= '0;
        tx_run <= 1'b0;
      end else begin
        tx_run <= 1'b1;
        if (tx_run) begin
          tx_cnt <= tx_cnt + 3'd1;
          tx_sh  <= (tx_cnt == 3'd7) ? tx_byte[p] : {tx_sh[6:0], 1'b0};
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rx_sh       <= '0;
        rx_cnt      <= '0;
        rx_lock     <= 1'b0;
        rx_valid[p] <= 1'b0;
        rx_byte[p]  <= '0;
      end else begin
        rx_valid[p] <= 1'b0;
        if (rx_lock || ser_in[p]) begin
          rx_lock <= 1'b1;
          rx_sh   <= {rx_sh[6:0], ser_in[p]};
          rx_cnt  <= rx_cnt + 3'd1;
          if (rx_cnt == 3'd7) begin
            rx_valid[p] <= 1'b1;
            rx_byte[p]  <= {rx_sh[6:0], ser_in[p]};
          end
        end
      end
    end
  end

endmodule
