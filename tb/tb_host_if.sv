// tb_host_if: self-checking testbench of host_if, the serial command link
// and register file. Sends frames bit by bit on rxd, checks the threshold
// and latch-time registers, the command pulses, the frame_ok kick, a
// status and a threshold read-back decoded from txd, and that a frame
// broken by a long gap is discarded. Uses 8 clocks per bit to run fast.
`timescale 1ns/1ps
module tb_host_if;
  import ocp_pkg::*;
  localparam int unsigned CPB = 8;
  localparam int unsigned GAP = 200;
  localparam int unsigned N   = 4;

  logic clk = 1'b0, rst_n = 1'b0, rxd = 1'b1, txd;
  logic [15:0] status;
  logic [THR_W-1:0] thr_code [N];
  logic [LT_W-1:0]  latch_time;
  logic cmd_reset, cmd_selftest, frame_ok;
  logic [N-1:0] st_mask;
  int checks = 0, failures = 0;
  int n_reset = 0, n_st = 0, n_ok = 0;

  host_if #(.N_CH(N), .BIT_CLKS(CPB), .FRAME_GAP(GAP)) dut (
    .clk, .rst_n, .rxd, .txd, .status, .thr_code, .latch_time,
    .cmd_reset, .cmd_selftest, .st_mask, .frame_ok);

  always #12.5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (cmd_reset)    n_reset++;
    if (cmd_selftest) n_st++;
    if (frame_ok)     n_ok++;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic send_byte(input logic [7:0] b);
    rxd = 1'b0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = 1'b1; repeat (CPB) @(posedge clk);
  endtask

  task automatic send_frame(input logic [3:0] op, input logic [3:0] ch, input logic [15:0] d);
    send_byte({op, ch}); send_byte(d[15:8]); send_byte(d[7:0]);
    repeat (4) @(posedge clk);
  endtask

  // Receive one byte from txd, sampling mid-bit.
  task automatic recv_byte(output logic [7:0] b);
    int t = 0;
    while (txd !== 1'b0) begin @(posedge clk); t++; if (t > 2000) begin b = 'x; return; end end
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = txd; end
    repeat (CPB) @(posedge clk);
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] hi, lo;
    status = 16'hA5C3;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    for (int c = 0; c < N; c++) check("reset thr", thr_code[c], THR_DEFAULT);
    check("reset latch", latch_time, 0);

    for (int c = 0; c < N; c++) send_frame(OP_SET_THR, 4'(c), 16'(100 * c + 7));
    for (int c = 0; c < N; c++) check("thr", thr_code[c], 100 * c + 7);
    check("frames ok", n_ok, N);

    send_frame(OP_SET_THR, 4'd9, 16'h0123);           // channel out of range: ignored
    for (int c = 0; c < N; c++) check("thr kept", thr_code[c], 100 * c + 7);

    send_frame(OP_SET_LATCH, 4'd0, 16'd1234);
    check("latch", latch_time, 1234);

    send_frame(OP_RESET, 4'd0, 16'd0);
    check("reset pulses", n_reset, 1);
    send_frame(OP_SELFTEST, 4'd0, 16'h000A);
    check("selftest pulses", n_st, 1);
    check("selftest mask", st_mask, 4'hA);

    fork
      begin recv_byte(hi); recv_byte(lo); end
      send_frame(OP_READ_STAT, 4'd0, 16'd0);
    join
    check("status reply", {hi, lo}, 16'hA5C3);

    fork
      begin recv_byte(hi); recv_byte(lo); end
      send_frame(OP_READ_THR, 4'd2, 16'd0);
    join
    check("thr reply", {hi, lo}, 207);

    // A frame interrupted by a gap longer than FRAME_GAP is dropped; the
    // following complete frame is still decoded from its first byte.
    send_byte({OP_SET_LATCH, 4'd0});
    repeat (GAP + 20) @(posedge clk);
    send_frame(OP_SET_THR, 4'd1, 16'd999);
    check("gap resync thr", thr_code[1], 999);
    check("gap resync latch", latch_time, 1234);
    check("frames ok total", n_ok, N + 1 + 1 + 2 + 2 + 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
