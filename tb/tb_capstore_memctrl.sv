// tb_capstore_memctrl: self-checking test of the memory controller.
//
// For 3000 random cycles it drives random requests on all five sources,
// random write-source selects, a random PMU ready and random per-bank error
// flags from the memories. Each cycle it checks, against a reference written
// here, which source reaches each memory, that nothing reaches any memory
// while ready is low, that off-chip fills are always writes, the grants, and
// the sticky error register with its clear.
module tb_capstore_memctrl;
  localparam int unsigned B = 16, W = 8, WAW = 13, DAW = 11, AAW = 15;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic pmu_ready, w_sel, d_sel, err_clr;
  logic [B-1:0] ow_en, xw_en, xw_we, od_en, xd_en, xd_we, xa_en, xa_we;
  logic [B-1:0][WAW-1:0] ow_addr, xw_addr;
  logic [B-1:0][DAW-1:0] od_addr, xd_addr;
  logic [B-1:0][AAW-1:0] xa_addr;
  logic [B-1:0][W-1:0] ow_wdata, xw_wdata, od_wdata, xd_wdata, xa_wdata;
  logic ow_gnt, xw_gnt, od_gnt, xd_gnt, xa_gnt;
  logic [B-1:0] w_en, w_we, w_err, d_en, d_we, d_err, a_en, a_we, a_err;
  logic [B-1:0][WAW-1:0] w_addr;
  logic [B-1:0][DAW-1:0] d_addr;
  logic [B-1:0][AAW-1:0] a_addr;
  logic [B-1:0][W-1:0] w_wdata, d_wdata, a_wdata;
  logic [2:0] err;

  capstore_memctrl dut (.*);

  int unsigned checks = 0, failures = 0;
  int unsigned n_stall = 0, n_off = 0, n_acc = 0, n_err = 0;
  logic [2:0] exp_err;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [B-1:0] rnd16();
    return B'($urandom);
  endfunction

  initial begin
    rst_n = 1'b0; pmu_ready = 1'b0; w_sel = 1'b0; d_sel = 1'b0; err_clr = 1'b0;
    {ow_en, xw_en, xw_we, od_en, xd_en, xd_we, xa_en, xa_we} = '0;
    {w_err, d_err, a_err} = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1'b1;
    exp_err = '0;
    for (int unsigned t = 0; t < 3000; t++) begin
      pmu_ready = ($urandom_range(3, 0) != 0);
      w_sel = $urandom_range(1, 0); d_sel = $urandom_range(1, 0);
      ow_en = rnd16(); xw_en = rnd16(); xw_we = rnd16();
      od_en = rnd16(); xd_en = rnd16(); xd_we = rnd16();
      xa_en = rnd16(); xa_we = rnd16();
      for (int unsigned b = 0; b < B; b++) begin
        ow_addr[b] = WAW'($urandom); xw_addr[b] = WAW'($urandom);
        od_addr[b] = DAW'($urandom); xd_addr[b] = DAW'($urandom);
        xa_addr[b] = AAW'($urandom);
        ow_wdata[b] = W'($urandom); xw_wdata[b] = W'($urandom);
        od_wdata[b] = W'($urandom); xd_wdata[b] = W'($urandom);
        xa_wdata[b] = W'($urandom);
      end
      w_err = ($urandom_range(15, 0) == 0) ? B'(1) << $urandom_range(B - 1, 0) : '0;
      d_err = ($urandom_range(15, 0) == 0) ? B'(1) << $urandom_range(B - 1, 0) : '0;
      a_err = ($urandom_range(15, 0) == 0) ? B'(1) << $urandom_range(B - 1, 0) : '0;
      err_clr = ($urandom_range(31, 0) == 0);
      #1;
      if (!pmu_ready) n_stall++;
      if (pmu_ready && (!w_sel || !d_sel)) n_off++;
      if (pmu_ready && (w_sel || d_sel)) n_acc++;
      check(ow_gnt == (pmu_ready && !w_sel) && xw_gnt == (pmu_ready && w_sel), "weight grants");
      check(od_gnt == (pmu_ready && !d_sel) && xd_gnt == (pmu_ready && d_sel), "data grants");
      check(xa_gnt == pmu_ready, "accumulator grant");
      if (!pmu_ready) begin
        check(w_en == '0 && d_en == '0 && a_en == '0, "access passed while switching");
      end else begin
        for (int unsigned b = 0; b < B; b++) begin
          if (w_sel) check(w_en[b] == xw_en[b] && (!w_en[b] || (w_we[b] == xw_we[b]
              && w_addr[b] == xw_addr[b] && w_wdata[b] == xw_wdata[b])), "weight from accel");
          else check(w_en[b] == ow_en[b] && (!w_en[b] || (w_we[b]
              && w_addr[b] == ow_addr[b] && w_wdata[b] == ow_wdata[b])), "weight from off-chip");
          if (d_sel) check(d_en[b] == xd_en[b] && (!d_en[b] || (d_we[b] == xd_we[b]
              && d_addr[b] == xd_addr[b] && d_wdata[b] == xd_wdata[b])), "data from accel");
          else check(d_en[b] == od_en[b] && (!d_en[b] || (d_we[b]
              && d_addr[b] == od_addr[b] && d_wdata[b] == od_wdata[b])), "data from off-chip");
          check(a_en[b] == xa_en[b] && (!a_en[b] || (a_we[b] == xa_we[b]
              && a_addr[b] == xa_addr[b] && a_wdata[b] == xa_wdata[b])), "accumulator");
        end
      end
      @(posedge clk);
      if (err_clr) exp_err = '0;
      else exp_err |= {|a_err, |d_err, |w_err};
      if (|{a_err, d_err, w_err}) n_err++;
      #1;
      check(err == exp_err, $sformatf("sticky err %b exp %b", err, exp_err));
    end
    check(n_stall > 0 && n_off > 0 && n_acc > 0 && n_err > 0, "every case seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
