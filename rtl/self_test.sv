// self_test: self-test sequencer of the fast protection channels.
//
// `start` with a channel `mask` runs a test of every selected channel in
// turn, lowest first. For each, `test_pulse[ch]` injects a test voltage at
// the channel's signal-conditioning input; the channel passes if its
// synchronised comparator output goes high within TIMEOUT clocks. The pulse
// is held PULSE clocks in all, then removed, and the sequencer waits for
// the comparator to fall again (or TIMEOUT more clocks) before the next
// channel. `busy` is high during the run, `done` rises at its end and
// `pass` holds the per-channel results (unselected channels read 0). The
// system description names a self-test function only; the sequence is this design's own.
`timescale 1ns/1ps
module self_test #(
  parameter int unsigned N_CH    = 4,
  parameter int unsigned TIMEOUT = 40,
  parameter int unsigned PULSE   = 80
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N_CH-1:0] mask,
  input  logic [N_CH-1:0] cmp_sync,
  output logic [N_CH-1:0] test_pulse,
  output logic            busy,
  output logic            done,
  output logic [N_CH-1:0] pass
);
  typedef enum logic [1:0] {T_IDLE, T_PULSE, T_SETTLE} st_e;
  st_e st;
  localparam int unsigned CW = $clog2(PULSE + TIMEOUT + 1);
  localparam int unsigned IW = (N_CH > 1) ? $clog2(N_CH) : 1;
  logic [CW-1:0]   cnt;
  logic [IW-1:0]   idx;
  logic [N_CH-1:0] todo;

  assign busy = (st != T_IDLE);

  // Lowest pending channel.
  logic [IW-1:0] next_idx;
  always_comb begin
    next_idx = '0;
    for (int i = N_CH - 1; i >= 0; i--) if (todo[i]) next_idx = IW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; cnt <= '0; idx <= '0; todo <= '0;
      test_pulse <= '0; done <= 1'b0; pass <= '0;
    end else begin
      unique case (st)
        T_IDLE: if (start && mask != '0) begin
          todo <= mask; pass <= '0; done <= 1'b0; st <= T_SETTLE; cnt <= '0;
        end
        T_PULSE: begin
          cnt <= cnt + 1'b1;
          if (cmp_sync[idx] && cnt < CW'(TIMEOUT)) pass[idx] <= 1'b1;
          if (cnt == CW'(PULSE - 1)) begin
            test_pulse <= '0; st <= T_SETTLE; cnt <= '0;
          end
        end
        T_SETTLE: begin
          // Wait for the previous channel to fall, then start the next one.
          cnt <= cnt + 1'b1;
          if ((cmp_sync == '0) || cnt == CW'(TIMEOUT)) begin
            cnt <= '0;
            if (todo == '0) begin
              st <= T_IDLE; done <= 1'b1;
            end else begin
              idx <= next_idx;
              todo[next_idx] <= 1'b0;
              test_pulse <= '0;
              test_pulse[next_idx] <= 1'b1;
              st <= T_PULSE;
            end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  // Only one channel is ever pulsed at a time, and only while busy.
  a_one_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(test_pulse) && (test_pulse == '0 || busy));
endmodule
