// serial_rx: asynchronous serial receiver for laser-state commands.
//
// Frame: idle high, one start bit, 8 data bits LSB first, one stop bit, no
// parity, CLKS_PER_BIT clocks per bit (3056 = 115200 baud at 352 MHz). The
// line is synchronised with two flops; the start bit is confirmed at its
// middle and each data bit is sampled at its middle. valid pulses for one
// clock with the byte in data once the stop bit has been sampled high; a
// frame whose stop bit is low is dropped. The published design states only
// that the laser state arrives over a serial line: frame format and rate are
// this design's choices.
`timescale 1ns / 1ps
module serial_rx #(
  parameter int unsigned CLKS_PER_BIT = 3056,
  parameter int unsigned CW           = $clog2(CLKS_PER_BIT + 1)
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rx,
  output logic       valid,
  output logic [7:0] data
);
  typedef enum logic [1:0] {IDLE, START, DATA, STOP} rx_state_e;

  rx_state_e     st;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [1:0]    sync;
  logic          rxs;

  always_ff @(posedge clk) begin
    if (rst) sync <= 2'b11;
    else     sync <= {sync[0], rx};
  end
  assign rxs = sync[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      st    <= IDLE;
      cnt   <= '0;
      bitn  <= '0;
      valid <= 1'b0;
      data  <= '0;
    end else begin
      valid <= 1'b0;
      unique case (st)
        IDLE: if (!rxs) begin
          st  <= START;
          cnt <= CW'(CLKS_PER_BIT / 2 - 1);
        end
        START: if (cnt == '0) begin
          if (!rxs) begin
            st   <= DATA;
            cnt  <= CW'(CLKS_PER_BIT - 1);
            bitn <= '0;
          end else begin
            st <= IDLE;   // glitch, not a start bit
          end
        end else cnt <= cnt - 1'b1;
        DATA: if (cnt == '0) begin
          data <= {rxs, data[7:1]};
          cnt  <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) st <= STOP;
          bitn <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        STOP: if (cnt == '0) begin
          valid <= rxs;
          st    <= IDLE;
        end else cnt <= cnt - 1'b1;
      endcase
    end
  end
endmodule
