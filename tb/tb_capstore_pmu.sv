// tb_capstore_pmu: self-checking test of the power management unit at its
// full size (64 / 16 / 128 sector rows).
//
// Each sleep transistor is replaced by a responder that copies its request to
// its acknowledge after a random 1..6 cycles. The test runs the inference
// schedule Conv1, PrimaryCaps, ClassCaps, then three routing iterations of
// Sum+Squash and Update+Softmax. After every op_start it checks the sector
// masks against the expected thermometer codes (table written out below, not
// taken from the design's package), that ready is low from the first cycle
// after op_start until the last acknowledge, and high from then on. It then
// reprograms two table entries and checks they take effect.
module tb_capstore_pmu;
  import capstore_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  localparam int unsigned WS = 64, DS = 16, AS = 128;

  logic op_start, cfg_we, ready;
  op_e  op, cfg_op;
  mem_e cfg_mem;
  logic [7:0] cfg_sectors;
  logic [WS-1:0] w_sleep_req, w_sleep_ack;
  logic [DS-1:0] d_sleep_req, d_sleep_ack;
  logic [AS-1:0] a_sleep_req, a_sleep_ack;
  logic [6:0] w_on;
  logic [4:0] d_on;
  logic [7:0] a_on;

  capstore_pmu dut (.*);

  // Acknowledge responders with random latency.
  int unsigned w_cnt [WS], d_cnt [DS], a_cnt [AS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_sleep_ack <= '0; d_sleep_ack <= '0; a_sleep_ack <= '0;
      for (int i = 0; i < WS; i++) w_cnt[i] <= 0;
      for (int i = 0; i < DS; i++) d_cnt[i] <= 0;
      for (int i = 0; i < AS; i++) a_cnt[i] <= 0;
    end else begin
      for (int i = 0; i < WS; i++)
        if (w_sleep_req[i] == w_sleep_ack[i]) w_cnt[i] <= $urandom_range(6, 1);
        else if (w_cnt[i] <= 1) w_sleep_ack[i] <= w_sleep_req[i];
        else w_cnt[i] <= w_cnt[i] - 1;
      for (int i = 0; i < DS; i++)
        if (d_sleep_req[i] == d_sleep_ack[i]) d_cnt[i] <= $urandom_range(6, 1);
        else if (d_cnt[i] <= 1) d_sleep_ack[i] <= d_sleep_req[i];
        else d_cnt[i] <= d_cnt[i] - 1;
      for (int i = 0; i < AS; i++)
        if (a_sleep_req[i] == a_sleep_ack[i]) a_cnt[i] <= $urandom_range(6, 1);
        else if (a_cnt[i] <= 1) a_sleep_ack[i] <= a_sleep_req[i];
        else a_cnt[i] <= a_cnt[i] - 1;
    end
  end

  // Expected sector rows per operation (C1, PC, CC-FC, S+Sq, U+So).
  int unsigned exp_w [5] = '{1, 1, 64, 7, 7};
  int unsigned exp_d [5] = '{16, 6, 1, 6, 6};
  int unsigned exp_a [5] = '{89, 128, 57, 57, 57};

  int unsigned checks = 0, failures = 0;
  int unsigned n_sleep = 0, n_wake = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic bit is_thermo(logic [AS-1:0] m, int unsigned n, int unsigned k);
    for (int unsigned i = 0; i < n; i++) if (m[i] != (i < k)) return 0;
    return 1;
  endfunction

  task automatic run_op(op_e o);
    logic [WS-1:0] w_old = w_sleep_req;
    logic [DS-1:0] d_old = d_sleep_req;
    logic [AS-1:0] a_old = a_sleep_req;
    int unsigned n = 0;
    bit changed;
    op = o; op_start = 1'b1;
    @(posedge clk); #1;
    op_start = 1'b0;
    check(is_thermo(AS'(w_sleep_req), WS, exp_w[o]), $sformatf("w mask op %0d", o));
    check(is_thermo(AS'(d_sleep_req), DS, exp_d[o]), $sformatf("d mask op %0d", o));
    check(is_thermo(a_sleep_req, AS, exp_a[o]), $sformatf("a mask op %0d", o));
    check(32'(w_on) == exp_w[o] && 32'(d_on) == exp_d[o] && 32'(a_on) == exp_a[o], "on counts");
    n_sleep += $countones(w_old & ~w_sleep_req) + $countones(d_old & ~d_sleep_req)
             + $countones(a_old & ~a_sleep_req);
    n_wake  += $countones(~w_old & w_sleep_req) + $countones(~d_old & d_sleep_req)
             + $countones(~a_old & a_sleep_req);
    changed = (w_old != w_sleep_req) || (d_old != d_sleep_req) || (a_old != a_sleep_req);
    if (changed) check(!ready, "ready must drop while sectors switch");
    while ((w_sleep_ack != w_sleep_req) || (d_sleep_ack != d_sleep_req)
           || (a_sleep_ack != a_sleep_req)) begin
      check(!ready, "ready high before all acknowledges");
      @(posedge clk); #1;
      n++;
    end
    check(ready, "ready after all acknowledges");
    check(n <= 7, $sformatf("switch took %0d cycles", n));
    repeat (3) begin
      @(posedge clk); #1;
      check(ready, "ready stays high");
    end
  endtask

  initial begin
    rst_n = 1'b0; op_start = 1'b0; op = OP_C1;
    cfg_we = 1'b0; cfg_op = OP_C1; cfg_mem = MEM_W; cfg_sectors = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(w_sleep_req == '0 && d_sleep_req == '0 && a_sleep_req == '0, "all off after reset");
    check(ready, "ready after reset");
    run_op(OP_C1);
    run_op(OP_PC);
    run_op(OP_CCFC);
    repeat (3) begin
      run_op(OP_SSQ);
      run_op(OP_USO);
    end
    run_op(OP_USO);   // same operation again: nothing to switch
    // reprogram Conv1: 10 weight rows, 3 accumulator rows; 200 clips to 128
    cfg_we = 1'b1; cfg_op = OP_C1; cfg_mem = MEM_W; cfg_sectors = 8'd10;
    @(posedge clk); #1;
    cfg_mem = MEM_A; cfg_sectors = 8'd3;
    @(posedge clk); #1;
    cfg_op = OP_PC; cfg_mem = MEM_D; cfg_sectors = 8'd200;
    @(posedge clk); #1;
    cfg_we = 1'b0;
    exp_w[0] = 10; exp_a[0] = 3; exp_d[1] = 16;
    run_op(OP_C1);
    run_op(OP_PC);
    check(n_sleep > 0, "no sector was put to sleep");
    check(n_wake > 0, "no sector was woken");
    $display("sector sleeps %0d, wake-ups %0d", n_sleep, n_wake);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
