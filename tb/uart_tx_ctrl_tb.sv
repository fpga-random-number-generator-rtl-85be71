// uart_tx_ctrl_tb: checks the UART transmitter with a receiver model.
//
// Two transmitters are tested: one at 16 clocks per bit with 200 random bytes,
// and one at the full 868 clocks per bit (115200 baud at 100 MHz) with a few
// bytes. The receiver model waits for the falling start edge, samples each
// bit in its middle, and checks start bit 0, the byte LSB first, and stop bit
// 1. The test also checks that ready drops in the cycle after send, stays low
// for exactly 10 bit times, and that the line idles high.
`include "tb_checks.svh"
module uart_tx_ctrl_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one transmitter with its driver, receiver and checks
  logic       send_f = 0, send_s = 0;
  logic [7:0] data_f = 0, data_s = 0;
  logic       ready_f, ready_s, tx_f, tx_s;
  uart_tx_ctrl #(.CLKS_PER_BIT(16)) dut_f (.clk, .rst, .send(send_f), .data(data_f), .ready(ready_f), .uart_tx(tx_f));
  uart_tx_ctrl                      dut_s (.clk, .rst, .send(send_s), .data(data_s), .ready(ready_s), .uart_tx(tx_s));

  task automatic send_and_check(input int cpb, input logic [7:0] b, input bit fast);
    int busy = 0;
    logic [9:0] got;
    // drive send for one cycle
    if (fast) begin
      `CHECK(ready_f && tx_f, "ready and idle high before send")
      data_f = b; send_f = 1; @(negedge clk); send_f = 0; data_f = $urandom;
    end else begin
      `CHECK(ready_s && tx_s, "ready and idle high before send")
      data_s = b; send_s = 1; @(negedge clk); send_s = 0; data_s = $urandom;
    end
    `CHECK((fast ? ready_f : ready_s) == 0, "ready low in the cycle after send")
    // sample the line in the middle of each bit: the start bit began at the
    // edge that took send
    for (int i = 0; i < 10; i++) begin
      repeat (i == 0 ? cpb / 2 - 1 : cpb) @(negedge clk);
      got[i] = fast ? tx_f : tx_s;
    end
    while (!(fast ? ready_f : ready_s)) begin @(negedge clk); busy++; end
    `CHECK(got[0] == 1'b0, "start bit")
    `CHECK(got[8:1] == b, $sformatf("data %h want %h", got[8:1], b))
    `CHECK(got[9] == 1'b1, "stop bit")
    // ready low from the cycle after send for 10 bit times in all; the wait
    // loop above also counted the first cycle with ready high again
    `CHECK(cpb / 2 + 9 * cpb + busy - 1 == 10 * cpb, $sformatf("busy for %0d cycles", cpb / 2 + 9 * cpb + busy - 1))
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      send_and_check(16, 8'($urandom), 1);
      repeat ($urandom % 3) @(negedge clk);
    end
    send_and_check(868, 8'h78, 0);
    send_and_check(868, 8'hA5, 0);
    send_and_check(868, 8'h01, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
