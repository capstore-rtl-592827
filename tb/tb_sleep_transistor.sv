// tb_sleep_transistor: self-checking test of the sleep transistor model.
//
// Runs complete sleep cycles ON -> OFF -> ON with the default and with
// non-default transition times, and checks that the acknowledge follows the
// request after exactly T_SLEEP / T_WAKEUP cycles, that sector_on is low from
// the falling request until the rising acknowledge, and that a request
// withdrawn early cancels the transition.
module tb_sleep_transistor;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  localparam int unsigned TS0 = 2, TW0 = 4;   // defaults
  localparam int unsigned TS1 = 5, TW1 = 9;

  logic req0, ack0, on0, req1, ack1, on1;
  sleep_transistor u0 (.clk, .rst_n, .sleep_req(req0), .sleep_ack(ack0), .sector_on(on0));
  sleep_transistor #(.T_SLEEP(TS1), .T_WAKEUP(TW1)) u1 (
    .clk, .rst_n, .sleep_req(req1), .sleep_ack(ack1), .sector_on(on1));

  int unsigned checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Drives one request edge on instance sel and measures the cycles until the
  // acknowledge follows; sector_on is sampled every cycle meanwhile.
  task automatic edge_latency(bit sel, bit level, int unsigned exp);
    int unsigned n = 0;
    if (sel) req1 = level; else req0 = level;
    do begin
      @(posedge clk); #1;
      n++;
      check((sel ? on1 : on0) == (level && (sel ? ack1 : ack0)), "sector_on during transition");
    end while ((sel ? ack1 : ack0) != level && n < 50);
    check(n == exp, $sformatf("inst %0d level %0d latency %0d exp %0d", sel, level, n, exp));
    check((sel ? on1 : on0) == level, "sector_on after transition");
  endtask

  initial begin
    rst_n = 1'b0; req0 = 1'b0; req1 = 1'b0;
    repeat (2) @(posedge clk); #1;
    check(!ack0 && !on0 && !ack1 && !on1, "reset state is off");
    rst_n = 1'b1;
    repeat (3) begin
      edge_latency(0, 1'b1, TW0);
      repeat ($urandom_range(5, 1)) @(posedge clk); #1;
      check(on0, "stays on");
      edge_latency(0, 1'b0, TS0);
      edge_latency(1, 1'b1, TW1);
      edge_latency(1, 1'b0, TS1);
    end
    // wake up, then a sleep request withdrawn after 2 cycles is cancelled
    edge_latency(1, 1'b1, TW1);
    req1 = 1'b0;
    repeat (2) @(posedge clk); #1;
    check(ack1 && !on1, "sleeping, not yet acknowledged");
    req1 = 1'b1;
    @(posedge clk); #1;
    check(ack1 && on1, "withdrawn sleep request cancelled");
    repeat (TS1 + 2) @(posedge clk); #1;
    check(ack1 && on1, "still on after cancel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
