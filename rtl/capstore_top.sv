// capstore_top: CapStore on-chip memory in its power-gated separated
// organisation (PG-SEP), between a CapsuleNet accelerator and off-chip DRAM.
//
// Contents: a weight memory (16 banks x 64 sectors x 108 B = 110592 B), a
// data memory (16 x 16 x 100 B = 25600 B) and an accumulator memory
// (16 x 128 x 225 B = 460800 B), one sleep transistor per sector row of each
// memory (64 + 16 + 128), the application-aware power management unit that
// drives them, and the memory controller with the write-source multiplexers.
//
// Use: the accelerator's control unit announces each operation with op_start
// and op. The PMU then wakes the sector rows that operation needs and puts the
// others to sleep; ready is low until every sleep transistor has acknowledged,
// and during that time the memory controller grants no access (the *_gnt
// outputs are low). w_sel / d_sel choose, per cycle, whether the off-chip bus
// or the accelerator owns the weight / data memory. Every memory port is
// per bank; reads return one cycle after they are granted. err collects, per
// memory, accesses that hit a sector with no power.
//
// The accelerator (systolic array, activation unit, control unit) and the
// DRAM are outside this module; their signals are its ports. Sizes, banks and
// sector counts are the paper's; word width, transition times and the
// protocol details are this design's choices (see the submodules).
module capstore_top
  import capstore_pkg::*;
#(
  parameter int unsigned BANKS    = NUM_BANKS,
  parameter int unsigned WIDTH    = WORD_W,
  parameter int unsigned WS       = W_SECTORS,
  parameter int unsigned WSB      = W_SECTOR_BYTES,
  parameter int unsigned DS       = D_SECTORS,
  parameter int unsigned DSB      = D_SECTOR_BYTES,
  parameter int unsigned AS       = A_SECTORS,
  parameter int unsigned ASB      = A_SECTOR_BYTES,
  parameter int unsigned T_SLEEP  = 2,
  parameter int unsigned T_WAKEUP = 4,
  localparam int unsigned WAW = $clog2(WS * WSB),
  localparam int unsigned DAW = $clog2(DS * DSB),
  localparam int unsigned AAW = $clog2(AS * ASB),
  localparam int unsigned WCW = $clog2(WS + 1),
  localparam int unsigned DCW = $clog2(DS + 1),
  localparam int unsigned ACW = $clog2(AS + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // control unit
  input  logic                        op_start,
  input  op_e                         op,
  input  logic                        w_sel,
  input  logic                        d_sel,
  // PMU table programming
  input  logic                        cfg_we,
  input  op_e                         cfg_op,
  input  mem_e                        cfg_mem,
  input  logic [7:0]                  cfg_sectors,
  // off-chip bus: weight and data fill
  input  logic [BANKS-1:0]            ow_en,
  input  logic [BANKS-1:0][WAW-1:0]   ow_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] ow_wdata,
  output logic                        ow_gnt,
  input  logic [BANKS-1:0]            od_en,
  input  logic [BANKS-1:0][DAW-1:0]   od_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] od_wdata,
  output logic                        od_gnt,
  // accelerator: weight, data, accumulator
  input  logic [BANKS-1:0]            xw_en,
  input  logic [BANKS-1:0]            xw_we,
  input  logic [BANKS-1:0][WAW-1:0]   xw_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] xw_wdata,
  output logic [BANKS-1:0][WIDTH-1:0] xw_rdata,
  output logic                        xw_gnt,
  input  logic [BANKS-1:0]            xd_en,
  input  logic [BANKS-1:0]            xd_we,
  input  logic [BANKS-1:0][DAW-1:0]   xd_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] xd_wdata,
  output logic [BANKS-1:0][WIDTH-1:0] xd_rdata,
  output logic                        xd_gnt,
  input  logic [BANKS-1:0]            xa_en,
  input  logic [BANKS-1:0]            xa_we,
  input  logic [BANKS-1:0][AAW-1:0]   xa_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] xa_wdata,
  output logic [BANKS-1:0][WIDTH-1:0] xa_rdata,
  output logic                        xa_gnt,
  // status
  output logic                        ready,
  input  logic                        err_clr,
  output logic [2:0]                  err,
  output logic [WCW-1:0]              w_on,
  output logic [DCW-1:0]              d_on,
  output logic [ACW-1:0]              a_on
);

  logic [WS-1:0] w_req, w_ack, w_pwr;
  logic [DS-1:0] d_req, d_ack, d_pwr;
  logic [AS-1:0] a_req, a_ack, a_pwr;

  capstore_pmu #(.WS(WS), .DS(DS), .AS(AS)) u_pmu (
    .clk, .rst_n, .op_start, .op,
    .cfg_we, .cfg_op, .cfg_mem, .cfg_sectors,
    .w_sleep_req(w_req), .w_sleep_ack(w_ack),
    .d_sleep_req(d_req), .d_sleep_ack(d_ack),
    .a_sleep_req(a_req), .a_sleep_ack(a_ack),
    .ready, .w_on, .d_on, .a_on
  );

  for (genvar s = 0; s < WS; s++) begin : g_w_st
    sleep_transistor #(.T_SLEEP(T_SLEEP), .T_WAKEUP(T_WAKEUP)) u_st (
      .clk, .rst_n, .sleep_req(w_req[s]), .sleep_ack(w_ack[s]), .sector_on(w_pwr[s]));
  end
  for (genvar s = 0; s < DS; s++) begin : g_d_st
    sleep_transistor #(.T_SLEEP(T_SLEEP), .T_WAKEUP(T_WAKEUP)) u_st (
      .clk, .rst_n, .sleep_req(d_req[s]), .sleep_ack(d_ack[s]), .sector_on(d_pwr[s]));
  end
  for (genvar s = 0; s < AS; s++) begin : g_a_st
    sleep_transistor #(.T_SLEEP(T_SLEEP), .T_WAKEUP(T_WAKEUP)) u_st (
      .clk, .rst_n, .sleep_req(a_req[s]), .sleep_ack(a_ack[s]), .sector_on(a_pwr[s]));
  end

  logic [BANKS-1:0]            w_en, w_we, w_err;
  logic [BANKS-1:0][WAW-1:0]   w_addr;
  logic [BANKS-1:0][WIDTH-1:0] w_wdata;
  logic [BANKS-1:0]            d_en, d_we, d_err;
  logic [BANKS-1:0][DAW-1:0]   d_addr;
  logic [BANKS-1:0][WIDTH-1:0] d_wdata;
  logic [BANKS-1:0]            a_en, a_we, a_err;
  logic [BANKS-1:0][AAW-1:0]   a_addr;
  logic [BANKS-1:0][WIDTH-1:0] a_wdata;

  capstore_memctrl #(.BANKS(BANKS), .WIDTH(WIDTH), .WAW(WAW), .DAW(DAW), .AAW(AAW)) u_ctrl (
    .clk, .rst_n, .pmu_ready(ready), .w_sel, .d_sel,
    .ow_en, .ow_addr, .ow_wdata, .ow_gnt,
    .xw_en, .xw_we, .xw_addr, .xw_wdata, .xw_gnt,
    .od_en, .od_addr, .od_wdata, .od_gnt,
    .xd_en, .xd_we, .xd_addr, .xd_wdata, .xd_gnt,
    .xa_en, .xa_we, .xa_addr, .xa_wdata, .xa_gnt,
    .w_en, .w_we, .w_addr, .w_wdata, .w_err,
    .d_en, .d_we, .d_addr, .d_wdata, .d_err,
    .a_en, .a_we, .a_addr, .a_wdata, .a_err,
    .err_clr, .err
  );

  capstore_sram #(.BANKS(BANKS), .SECTORS(WS), .SECTOR_BYTES(WSB), .WIDTH(WIDTH)) u_wmem (
    .clk, .sector_on(w_pwr), .en(w_en), .we(w_we), .addr(w_addr), .wdata(w_wdata),
    .rdata(xw_rdata), .err(w_err));
  capstore_sram #(.BANKS(BANKS), .SECTORS(DS), .SECTOR_BYTES(DSB), .WIDTH(WIDTH)) u_dmem (
    .clk, .sector_on(d_pwr), .en(d_en), .we(d_we), .addr(d_addr), .wdata(d_wdata),
    .rdata(xd_rdata), .err(d_err));
  capstore_sram #(.BANKS(BANKS), .SECTORS(AS), .SECTOR_BYTES(ASB), .WIDTH(WIDTH)) u_amem (
    .clk, .sector_on(a_pwr), .en(a_en), .we(a_we), .addr(a_addr), .wdata(a_wdata),
    .rdata(xa_rdata), .err(a_err));

endmodule
