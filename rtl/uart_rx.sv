// uart_rx: asynchronous serial receiver, 8 data bits, no parity, one stop bit.
//
// The line is synchronised with two flip-flops. A falling edge starts a
// frame; the start bit is re-checked at its middle, then each data bit is
// sampled in the middle of its bit time (LSB first). `valid` pulses for one
// clock with the byte when a stop bit of 1 is seen; a frame whose stop bit is
// 0 is dropped. The link type and format are this design's choice for the
// host link of the protection board.
`timescale 1ns/1ps
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 347
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;
  state_e state;
  logic [1:0]  sync;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam logic [CW-1:0] HALF = CW'(CLKS_PER_BIT / 2);
  localparam logic [CW-1:0] LAST = CW'(CLKS_PER_BIT - 1);
  logic [CW-1:0] cnt;
  logic [2:0]  bitn;
  logic [7:0]  sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= 2'b11;
    else        sync <= {sync[0], rxd};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; bitn <= '0; sh <= '0; data <= '0; valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: if (!sync[1]) begin state <= S_START; cnt <= '0; end
        S_START: begin
          if (cnt == HALF) begin
            cnt   <= '0;
            state <= sync[1] ? S_IDLE : S_DATA;
            bitn  <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (cnt == LAST) begin
            cnt <= '0;
            sh  <= {sync[1], sh[7:1]};
            if (bitn == 3'd7) state <= S_STOP;
            bitn <= bitn + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_STOP: begin
          if (cnt == LAST) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (sync[1]) begin data <= sh; valid <= 1'b1; end
          end else cnt <= cnt + 1'b1;
        end
      endcase
    end
  end
endmodule
