// tb_capstore_top: end-to-end test of the CapStore PG-SEP memory at its full
// default size (no parameter overrides), through one complete CapsuleNet
// inference: Conv1, PrimaryCaps, ClassCaps, then three routing iterations of
// Sum+Squash and Update+Softmax, then the first operation of a next image
// after the power table has been reprogrammed.
//
// For every operation the test
//   1. announces it (op_start) and holds an accumulator request until it is
//      granted, checking that the wait equals the sleep transistors'
//      wake-up (or sleep) time whenever sectors switch, and that the sector
//      counts match the expected per-operation table;
//   2. reads back every accumulator word still valid from the previous
//      operation: partial sums in sectors that stayed on must survive;
//   3. fills the powered part of the weight and data memories from the
//      off-chip bus, one word per bank per cycle, and reads them back from
//      the accelerator side;
//   4. writes new partial sums into the whole powered accumulator, writes
//      activation results into the data memory, and reads both back;
//   5. touches the first switched-off sector of each memory and expects the
//      error flags.
// All expected values come from a reference model kept in the testbench
// (contents and validity per word). Counters record how often each
// mechanism (stall, sector sleep, sector wake-up, retention, off-chip fill,
// accelerator access, off-sector error, table reprogramming) happened; one
// that never happened counts as a failure.
module tb_capstore_top;
  import capstore_pkg::*;

  localparam int unsigned B = 16, W = 8;
  localparam int unsigned WS = 64, WSB = 108, DS = 16, DSB = 100, AS = 128, ASB = 225;
  localparam int unsigned WD = WS * WSB, DD = DS * DSB, AD = AS * ASB;
  localparam int unsigned WAW = 13, DAW = 11, AAW = 15;
  localparam int unsigned TSL = 2, TWK = 4;   // model defaults

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic op_start, w_sel, d_sel, cfg_we, err_clr, ready;
  op_e  op, cfg_op;
  mem_e cfg_mem;
  logic [7:0] cfg_sectors;
  logic [B-1:0] ow_en, od_en, xw_en, xw_we, xd_en, xd_we, xa_en, xa_we;
  logic [B-1:0][WAW-1:0] ow_addr, xw_addr;
  logic [B-1:0][DAW-1:0] od_addr, xd_addr;
  logic [B-1:0][AAW-1:0] xa_addr;
  logic [B-1:0][W-1:0] ow_wdata, od_wdata, xw_wdata, xd_wdata, xa_wdata;
  logic [B-1:0][W-1:0] xw_rdata, xd_rdata, xa_rdata;
  logic ow_gnt, od_gnt, xw_gnt, xd_gnt, xa_gnt;
  logic [2:0] err;
  logic [6:0] w_on;
  logic [4:0] d_on;
  logic [7:0] a_on;

  capstore_top dut (.*);

  // reference model
  logic [W-1:0] ref_w [B][WD];
  logic [W-1:0] ref_d [B][DD];
  logic [W-1:0] ref_a [B][AD];
  bit val_w [WD];
  bit val_d [DD];
  bit val_a [AD];

  int unsigned exp_w [5] = '{1, 1, 64, 7, 7};
  int unsigned exp_d [5] = '{16, 6, 1, 6, 6};
  int unsigned exp_a [5] = '{89, 128, 57, 57, 57};
  int unsigned cur_w = 0, cur_d = 0, cur_a = 0;

  int unsigned checks = 0, failures = 0;
  int unsigned n_stall = 0, n_sleep = 0, n_wake = 0, n_retained = 0, n_fill = 0;
  int unsigned n_acc = 0, n_off_err = 0, n_cfg = 0, n_ops = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [W-1:0] pat(int unsigned m, int unsigned b, int unsigned a,
                                       int unsigned salt);
    int unsigned h = m * 32'h3C6E + b * 32'h9E37 + a * 32'h85EB + salt * 32'hC2B2;
    return W'(h ^ (h >> 9) ^ (h >> 17));
  endfunction

  task automatic idle();
    {ow_en, od_en, xw_en, xw_we, xd_en, xd_we, xa_en, xa_we} = '0;
  endtask

  // --- operation switch ---------------------------------------------------
  task automatic start_op(op_e o);
    int unsigned nw = exp_w[o], nd = exp_d[o], na = exp_a[o];
    int unsigned wait_cycles = 0, exp_wait;
    bit wake = (nw > cur_w) || (nd > cur_d) || (na > cur_a);
    bit slp  = (nw < cur_w) || (nd < cur_d) || (na < cur_a);
    exp_wait = wake ? TWK : (slp ? TSL : 0);
    if (wake && slp) exp_wait = (TWK > TSL) ? TWK : TSL;
    op = o; op_start = 1'b1;
    @(posedge clk); #1;
    op_start = 1'b0;
    n_ops++;
    // hold an accumulator read until granted
    xa_en = '1; xa_we = '0;
    for (int unsigned b = 0; b < B; b++) xa_addr[b] = '0;
    while (!xa_gnt && wait_cycles < 100) begin
      @(posedge clk); #1;
      wait_cycles++;
    end
    idle();
    @(posedge clk); #1;
    if (wait_cycles > 0) n_stall++;
    check(wait_cycles == exp_wait, $sformatf("op %0d switch took %0d cycles, exp %0d",
                                             o, wait_cycles, exp_wait));
    check(32'(w_on) == nw && 32'(d_on) == nd && 32'(a_on) == na,
          $sformatf("op %0d sector counts %0d/%0d/%0d", o, w_on, d_on, a_on));
    if (nw < cur_w) n_sleep += cur_w - nw; else n_wake += nw - cur_w;
    if (nd < cur_d) n_sleep += cur_d - nd; else n_wake += nd - cur_d;
    if (na < cur_a) n_sleep += cur_a - na; else n_wake += na - cur_a;
    for (int unsigned a = nw * WSB; a < WD; a++) val_w[a] = 0;
    for (int unsigned a = nd * DSB; a < DD; a++) val_d[a] = 0;
    for (int unsigned a = na * ASB; a < AD; a++) val_a[a] = 0;
    cur_w = nw; cur_d = nd; cur_a = na;
  endtask

  // --- accumulator --------------------------------------------------------
  task automatic read_acc(bit count_retained);
    for (int unsigned a = 0; a < cur_a * ASB; a++) begin
      if (!val_a[a]) continue;
      xa_en = '1; xa_we = '0;
      for (int unsigned b = 0; b < B; b++) xa_addr[b] = AAW'(a);
      @(posedge clk); #1;
      idle();
      for (int unsigned b = 0; b < B; b++)
        check(xa_rdata[b] == ref_a[b][a], $sformatf("acc b%0d a%0d", b, a));
      check(err == '0, "unexpected error on accumulator read");
      if (count_retained) n_retained++;
    end
    n_acc++;
  endtask

  task automatic write_acc(int unsigned salt);
    longint unsigned t0 = $time / 10;
    for (int unsigned a = 0; a < cur_a * ASB; a++) begin
      xa_en = '1; xa_we = '1;
      for (int unsigned b = 0; b < B; b++) begin
        xa_addr[b] = AAW'(a);
        xa_wdata[b] = pat(2, b, a, salt);
        ref_a[b][a] = xa_wdata[b];
      end
      val_a[a] = 1;
      check(xa_gnt, "accumulator write not granted");
      @(posedge clk); #1;
    end
    idle();
    check($time / 10 - t0 == 64'(cur_a * ASB), "accumulator write rate is not one word per bank per cycle");
    n_acc++;
  endtask

  // --- weight and data fill from off-chip, read by the accelerator ----------
  task automatic fill_w(int unsigned salt);
    w_sel = 1'b0;
    #1;
    for (int unsigned a = 0; a < cur_w * WSB; a++) begin
      ow_en = '1;
      for (int unsigned b = 0; b < B; b++) begin
        ow_addr[b] = WAW'(a);
        ow_wdata[b] = pat(0, b, a, salt);
        ref_w[b][a] = ow_wdata[b];
      end
      val_w[a] = 1;
      check(ow_gnt, "off-chip weight write not granted");
      @(posedge clk); #1;
    end
    idle();
    n_fill++;
  endtask

  task automatic fill_d(int unsigned salt);
    d_sel = 1'b0;
    #1;
    for (int unsigned a = 0; a < cur_d * DSB; a++) begin
      od_en = '1;
      for (int unsigned b = 0; b < B; b++) begin
        od_addr[b] = DAW'(a);
        od_wdata[b] = pat(1, b, a, salt);
        ref_d[b][a] = od_wdata[b];
      end
      val_d[a] = 1;
      check(od_gnt, "off-chip data write not granted");
      @(posedge clk); #1;
    end
    idle();
    n_fill++;
  endtask

  task automatic read_w();
    w_sel = 1'b1;
    for (int unsigned a = 0; a < cur_w * WSB; a++) begin
      if (!val_w[a]) continue;
      xw_en = '1; xw_we = '0;
      for (int unsigned b = 0; b < B; b++) xw_addr[b] = WAW'(a);
      @(posedge clk); #1;
      idle();
      for (int unsigned b = 0; b < B; b++)
        check(xw_rdata[b] == ref_w[b][a], $sformatf("weight b%0d a%0d", b, a));
    end
    n_acc++;
  endtask

  task automatic read_d();
    d_sel = 1'b1;
    for (int unsigned a = 0; a < cur_d * DSB; a++) begin
      if (!val_d[a]) continue;
      xd_en = '1; xd_we = '0;
      for (int unsigned b = 0; b < B; b++) xd_addr[b] = DAW'(a);
      @(posedge clk); #1;
      idle();
      for (int unsigned b = 0; b < B; b++)
        check(xd_rdata[b] == ref_d[b][a], $sformatf("data b%0d a%0d", b, a));
    end
    n_acc++;
  endtask

  // activation results written back into the data memory
  task automatic act_write(int unsigned salt);
    d_sel = 1'b1;
    for (int unsigned a = 0; a < cur_d * DSB; a += 3) begin
      xd_en = '1; xd_we = '1;
      for (int unsigned b = 0; b < B; b++) begin
        xd_addr[b] = DAW'(a);
        xd_wdata[b] = pat(3, b, a, salt);
        ref_d[b][a] = xd_wdata[b];
      end
      @(posedge clk); #1;
    end
    idle();
    n_acc++;
  endtask

  // --- accesses to switched-off sectors --------------------------------------
  task automatic off_sector_access();
    if (cur_w < WS) begin
      w_sel = 1'b1; xw_en = 16'h0001; xw_we = '0; xw_addr[0] = WAW'(cur_w * WSB);
      @(posedge clk); #1;
      idle();
      check(xw_rdata[0] == '0, "read from off weight sector returned data");
      @(posedge clk); #1;
      check(err[0], "off weight sector access not flagged");
      n_off_err++;
    end
    if (cur_d < DS) begin
      d_sel = 1'b0; od_en = 16'h8000; od_addr[15] = DAW'(DD - 1); od_wdata[15] = 8'hA5;
      @(posedge clk); #1;
      idle();
      @(posedge clk); #1;
      check(err[1], "off data sector access not flagged");
      n_off_err++;
    end
    if (cur_a < AS) begin
      xa_en = 16'h0100; xa_we = 16'h0100; xa_addr[8] = AAW'(cur_a * ASB); xa_wdata[8] = 8'h5A;
      @(posedge clk); #1;
      idle();
      @(posedge clk); #1;
      check(err[2], "off accumulator sector access not flagged");
      n_off_err++;
    end
    err_clr = 1'b1;
    @(posedge clk); #1;
    err_clr = 1'b0;
    check(err == '0, "error register not cleared");
  endtask

  task automatic run_op(op_e o, int unsigned salt);
    start_op(o);
    read_acc(1'b1);
    fill_w(salt);
    fill_d(salt);
    read_w();
    read_d();
    write_acc(salt);
    act_write(salt);
    read_d();
    read_acc(1'b0);
    off_sector_access();
  endtask

  initial begin
    rst_n = 1'b0; op_start = 1'b0; op = OP_C1; w_sel = 1'b0; d_sel = 1'b0;
    cfg_we = 1'b0; cfg_op = OP_C1; cfg_mem = MEM_W; cfg_sectors = '0; err_clr = 1'b0;
    idle();
    ow_addr = '0; od_addr = '0; xw_addr = '0; xd_addr = '0; xa_addr = '0;
    ow_wdata = '0; od_wdata = '0; xw_wdata = '0; xd_wdata = '0; xa_wdata = '0;
    for (int unsigned a = 0; a < WD; a++) val_w[a] = 0;
    for (int unsigned a = 0; a < DD; a++) val_d[a] = 0;
    for (int unsigned a = 0; a < AD; a++) val_a[a] = 0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(w_on == '0 && d_on == '0 && a_on == '0, "sectors on after reset");
    run_op(OP_C1, 1);
    run_op(OP_PC, 2);
    run_op(OP_CCFC, 3);
    for (int unsigned it = 0; it < 3; it++) begin
      run_op(OP_SSQ, 4 + 2 * it);
      run_op(OP_USO, 5 + 2 * it);
    end
    // next image, with a reprogrammed Conv1 entry (2 weight rows)
    cfg_we = 1'b1; cfg_op = OP_C1; cfg_mem = MEM_W; cfg_sectors = 8'd2;
    @(posedge clk); #1;
    cfg_we = 1'b0;
    exp_w[0] = 2;
    n_cfg++;
    run_op(OP_C1, 11);

    check(n_stall > 0, "no stall happened");
    check(n_sleep > 0, "no sector was put to sleep");
    check(n_wake > 0, "no sector was woken");
    check(n_retained > 0, "no partial sum was carried across an operation");
    check(n_fill > 0, "no off-chip fill happened");
    check(n_acc > 0, "no accelerator access happened");
    check(n_off_err > 0, "no access to an off sector was flagged");
    check(n_cfg > 0, "power table never reprogrammed");
    $display("ops %0d, stalls %0d, sector sleeps %0d, wake-ups %0d, retained words %0d",
             n_ops, n_stall, n_sleep, n_wake, n_retained);
    $display("fills %0d, accelerator passes %0d, off-sector errors %0d, reprogrammings %0d",
             n_fill, n_acc, n_off_err, n_cfg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
