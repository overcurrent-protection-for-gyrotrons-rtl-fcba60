// host_if: host communication interface and register file of the fast
// protection FPGA.
//
// The control-room host sets the trip thresholds remotely over a serial link.
// Each command is a three-byte frame: {op[3:0], ch[3:0]}, data[15:8],
// data[7:0] (ops in ocp_pkg::op_e). A gap of more than FRAME_GAP clocks
// between bytes discards a partial frame, so the receiver resynchronises
// after noise. When the third byte arrives the command takes effect on the
// next clock: thresholds and the latch time are written to registers that
// drive the threshold DACs and the latch controllers; OP_RESET and
// OP_SELFTEST give one-clock pulses; OP_READ_STAT and OP_READ_THR send two
// reply bytes, MSB first. Every complete frame pulses `frame_ok`, which
// restarts the watchdog. Thresholds reset to THR_DEFAULT and the latch time
// to 0. Remote threshold setting follows the system description; the link,
// frame format and reset values are this design's own.
`timescale 1ns/1ps
module host_if
  import ocp_pkg::*;
#(
  parameter int unsigned N_CH         = N_FAST_CH,
  parameter int unsigned BIT_CLKS     = ocp_pkg::CLKS_PER_BIT,
  parameter int unsigned FRAME_GAP    = 40_000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   rxd,
  output logic                   txd,
  input  logic [15:0]            status,
  output logic [THR_W-1:0]       thr_code [N_CH],
  output logic [LT_W-1:0]        latch_time,
  output logic                   cmd_reset,
  output logic                   cmd_selftest,
  output logic [N_CH-1:0]        st_mask,
  output logic                   frame_ok
);
  logic [7:0] rx_data;
  logic       rx_valid;
  logic [7:0] tx_data;
  logic       tx_start, tx_busy;

  uart_rx #(.CLKS_PER_BIT(BIT_CLKS)) u_rx (.clk, .rst_n, .rxd, .data(rx_data), .valid(rx_valid));
  uart_tx #(.CLKS_PER_BIT(BIT_CLKS)) u_tx (.clk, .rst_n, .data(tx_data), .start(tx_start), .busy(tx_busy), .txd);

  // Frame assembly.
  logic [1:0]  nbyte;
  logic [7:0]  b0, b1;
  localparam int unsigned GW = $clog2(FRAME_GAP + 1);
  localparam int unsigned IW = (N_CH > 1) ? $clog2(N_CH) : 1;
  logic [GW-1:0] gap;
  logic        exec;
  logic [23:0] frame;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbyte <= '0; b0 <= '0; b1 <= '0; gap <= '0; exec <= 1'b0; frame <= '0;
    end else begin
      exec <= 1'b0;
      if (rx_valid) begin
        gap <= '0;
        unique case (nbyte)
          2'd0:    begin b0 <= rx_data; nbyte <= 2'd1; end
          2'd1:    begin b1 <= rx_data; nbyte <= 2'd2; end
          default: begin frame <= {b0, b1, rx_data}; exec <= 1'b1; nbyte <= 2'd0; end
        endcase
      end else if (nbyte != 2'd0) begin
        if (gap == GW'(FRAME_GAP)) begin nbyte <= '0; gap <= '0; end
        else gap <= gap + 1'b1;
      end
    end
  end

  op_e         op;
  logic [3:0]  ch;
  logic [15:0] arg;
  assign op  = op_e'(frame[23:20]);
  assign ch  = frame[19:16];
  assign arg = frame[15:0];

  // Register file and command pulses.
  logic        reply_req;
  logic [15:0] reply_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) thr_code[i] <= THR_DEFAULT;
      latch_time   <= '0;
      cmd_reset    <= 1'b0;
      cmd_selftest <= 1'b0;
      st_mask      <= '0;
      frame_ok     <= 1'b0;
      reply_req    <= 1'b0;
      reply_word   <= '0;
    end else begin
      cmd_reset    <= 1'b0;
      cmd_selftest <= 1'b0;
      frame_ok     <= exec;
      reply_req    <= 1'b0;
      if (exec) begin
        unique case (op)
          OP_SET_THR:   if (32'(ch) < N_CH) thr_code[ch[IW-1:0]] <= arg[THR_W-1:0];
          OP_SET_LATCH: latch_time <= arg;
          OP_RESET:     cmd_reset <= 1'b1;
          OP_SELFTEST:  begin st_mask <= arg[N_CH-1:0]; cmd_selftest <= 1'b1; end
          OP_READ_STAT: begin reply_word <= status; reply_req <= 1'b1; end
          OP_READ_THR:  if (32'(ch) < N_CH) begin
                          reply_word <= 16'(thr_code[ch[IW-1:0]]); reply_req <= 1'b1;
                        end
          default: ;
        endcase
      end
    end
  end

  // Two-byte reply, MSB first.
  logic [1:0] tx_left;
  logic [7:0] tx_lo;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_left <= '0; tx_lo <= '0; tx_data <= '0; tx_start <= 1'b0;
    end else begin
      tx_start <= 1'b0;
      if (reply_req) begin
        tx_data  <= reply_word[15:8];
        tx_lo    <= reply_word[7:0];
        tx_start <= 1'b1;
        tx_left  <= 2'd1;
      end else if (tx_left != 2'd0 && !tx_busy && !tx_start) begin
        tx_data  <= tx_lo;
        tx_start <= 1'b1;
        tx_left  <= tx_left - 1'b1;
      end
    end
  end
endmodule
