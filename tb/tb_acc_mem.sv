// tb_acc_mem: self-checking test of capstore_sram configured as the accumulator memory
// (16 banks x 128 sectors x 225 words per bank-sector).
//
// Phase 1 writes pattern A to every word of every bank with all sectors on,
// each bank walking its own rotated address order. Phase 2 switches off a
// random set of sectors and writes pattern B everywhere: writes into the off
// sectors must be dropped and flagged. Phase 3 reads every word back with the
// off sectors still off (data 0 and err expected there), then phase 4 powers
// everything up and reads again: on-sector words hold B, off-sector words
// still hold A. Addresses past the end of a bank must raise err. The read
// latency of one cycle is checked on every read.
module tb_acc_mem;
  localparam int unsigned BANKS = 16;
  localparam int unsigned S     = 128;
  localparam int unsigned SB    = 225;
  localparam int unsigned W     = 8;
  localparam int unsigned DEPTH = S * SB;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [S-1:0]                 sector_on;
  logic [BANKS-1:0]             en, we, err;
  logic [BANKS-1:0][AW-1:0]     addr;
  logic [BANKS-1:0][W-1:0]      wdata, rdata;

  capstore_sram #(.BANKS(BANKS), .SECTORS(S), .SECTOR_BYTES(SB), .WIDTH(W)) dut (.*);

  int unsigned checks = 0, failures = 0;
  logic [S-1:0] off_set;

  function automatic logic [W-1:0] pat(int unsigned b, int unsigned a, int unsigned salt);
    int unsigned h = (b * 32'h9E37 + a * 32'h85EB + salt * 32'hC2B2) ^ (a >> 3);
    return W'(h ^ (h >> 8) ^ (h >> 16));
  endfunction

  function automatic int unsigned bank_addr(int unsigned b, int unsigned i);
    return (i + b * 37) % DEPTH;
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", msg);
    end
  endtask

  task automatic write_all(int unsigned salt);
    for (int unsigned i = 0; i < DEPTH; i++) begin
      for (int unsigned b = 0; b < BANKS; b++) begin
        en[b] = 1'b1; we[b] = 1'b1;
        addr[b] = AW'(bank_addr(b, i));
        wdata[b] = pat(b, bank_addr(b, i), salt);
      end
      @(posedge clk); #1;
      for (int unsigned b = 0; b < BANKS; b++) begin
        int unsigned sec = bank_addr(b, i) / SB;
        check(err[b] == !sector_on[sec], $sformatf("write err flag b%0d a%0d", b, bank_addr(b, i)));
      end
    end
    en = '0; we = '0;
  endtask

  // Reads word i of every bank; expected value from the pattern of the last
  // write that could land there.
  task automatic read_all(bit after_power_up);
    for (int unsigned i = 0; i < DEPTH; i++) begin
      for (int unsigned b = 0; b < BANKS; b++) begin
        en[b] = 1'b1; we[b] = 1'b0; addr[b] = AW'(bank_addr(b, i));
      end
      @(posedge clk); #1;
      en = '0;
      for (int unsigned b = 0; b < BANKS; b++) begin
        int unsigned a   = bank_addr(b, i);
        int unsigned sec = a / SB;
        logic [W-1:0] exp;
        if (!after_power_up && off_set[sec]) exp = '0;
        else exp = off_set[sec] ? pat(b, a, 1) : pat(b, a, 2);
        check(rdata[b] == exp, $sformatf("read b%0d a%0d got %0h exp %0h", b, a, rdata[b], exp));
        check(err[b] == (!after_power_up && off_set[sec]), $sformatf("read err b%0d a%0d", b, a));
      end
    end
  endtask

  initial begin
    en = '0; we = '0; addr = '0; wdata = '0;
    sector_on = '1;
    off_set = '0;
    repeat (2) @(posedge clk); #1;
    write_all(1);
    for (int unsigned s = 0; s < S; s++) off_set[s] = ($urandom_range(1, 0) == 1);
    off_set[0] = 1'b0; off_set[S-1] = 1'b1;
    sector_on = ~off_set;
    write_all(2);
    read_all(1'b0);
    sector_on = '1;
    read_all(1'b1);
    // out-of-range addresses, when the address space has room for them
    if ((1 << AW) > DEPTH) begin
      for (int unsigned b = 0; b < BANKS; b++) begin
        en[b] = 1'b1; we[b] = b[0]; addr[b] = AW'(DEPTH + b % ((1 << AW) - DEPTH));
      end
      @(posedge clk); #1;
      en = '0;
      for (int unsigned b = 0; b < BANKS; b++) check(err[b], "out-of-range access not flagged");
    end
    // idle cycle: no enable, no error, read data 0
    @(posedge clk); #1;
    check(err == '0, "err with no access");
    check(rdata == '0, "rdata not cleared with no read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * DEPTH + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
