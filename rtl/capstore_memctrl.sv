// capstore_memctrl: memory controller and write-source multiplexers of the
// CapStore PG-SEP memory.
//
// Three single-port memories sit behind it. The weight memory is filled from
// the off-chip DRAM bus or used by the accelerator; the data memory is filled
// from the DRAM bus or used by the accelerator (activation-unit results are
// written back, the systolic array reads); the accumulator belongs to the
// accelerator alone. Per memory the control unit's select (w_sel, d_sel: 0 =
// off-chip, 1 = accelerator) decides which source owns all banks in a cycle.
// While the power manager is switching sectors (pmu_ready low) no request is
// passed on at all, as the paper's sleep-cycle diagram requires read/write
// requests to be idle from the sleep request until the acknowledge.
//
// Interface: every source is a per-bank request (en, address, data; the
// accelerator ports also carry we). A source's gnt output says whether its
// requests are taken this cycle; a requester that sees gnt low holds its
// request. Requests pass combinationally to the memories; read data return
// from the memories one cycle later on the accelerator side. Accesses the
// memories flag as hitting a switched-off sector set a sticky bit of err
// (bit 0 weight, 1 data, 2 accumulator) until err_clr.
//
// The two write multiplexers and the control unit's selects are drawn in the
// paper's architecture figure; what the memory controller itself does is not
// described, and the stall-on-switch, the grant signals and the sticky error
// register are this design's choices.
module capstore_memctrl #(
  parameter int unsigned BANKS = capstore_pkg::NUM_BANKS,
  parameter int unsigned WIDTH = capstore_pkg::WORD_W,
  parameter int unsigned WAW   = 13,
  parameter int unsigned DAW   = 11,
  parameter int unsigned AAW   = 15
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        pmu_ready,
  input  logic                        w_sel,
  input  logic                        d_sel,
  // off-chip -> weight memory
  input  logic [BANKS-1:0]            ow_en,
  input  logic [BANKS-1:0][WAW-1:0]   ow_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] ow_wdata,
  output logic                        ow_gnt,
  // accelerator <-> weight memory
  input  logic [BANKS-1:0]            xw_en,
  input  logic [BANKS-1:0]            xw_we,
  input  logic [BANKS-1:0][WAW-1:0]   xw_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] xw_wdata,
  output logic                        xw_gnt,
  // off-chip -> data memory
  input  logic [BANKS-1:0]            od_en,
  input  logic [BANKS-1:0][DAW-1:0]   od_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] od_wdata,
  output logic                        od_gnt,
  // accelerator <-> data memory
  input  logic [BANKS-1:0]            xd_en,
  input  logic [BANKS-1:0]            xd_we,
  input  logic [BANKS-1:0][DAW-1:0]   xd_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] xd_wdata,
  output logic                        xd_gnt,
  // accelerator <-> accumulator
  input  logic [BANKS-1:0]            xa_en,
  input  logic [BANKS-1:0]            xa_we,
  input  logic [BANKS-1:0][AAW-1:0]   xa_addr,
  input  logic [BANKS-1:0][WIDTH-1:0] xa_wdata,
  output logic                        xa_gnt,
  // toward the three memories
  output logic [BANKS-1:0]            w_en,
  output logic [BANKS-1:0]            w_we,
  output logic [BANKS-1:0][WAW-1:0]   w_addr,
  output logic [BANKS-1:0][WIDTH-1:0] w_wdata,
  input  logic [BANKS-1:0]            w_err,
  output logic [BANKS-1:0]            d_en,
  output logic [BANKS-1:0]            d_we,
  output logic [BANKS-1:0][DAW-1:0]   d_addr,
  output logic [BANKS-1:0][WIDTH-1:0] d_wdata,
  input  logic [BANKS-1:0]            d_err,
  output logic [BANKS-1:0]            a_en,
  output logic [BANKS-1:0]            a_we,
  output logic [BANKS-1:0][AAW-1:0]   a_addr,
  output logic [BANKS-1:0][WIDTH-1:0] a_wdata,
  input  logic [BANKS-1:0]            a_err,
  // status
  input  logic                        err_clr,
  output logic [2:0]                  err
);

  assign ow_gnt = pmu_ready && !w_sel;
  assign xw_gnt = pmu_ready &&  w_sel;
  assign od_gnt = pmu_ready && !d_sel;
  assign xd_gnt = pmu_ready &&  d_sel;
  assign xa_gnt = pmu_ready;

  always_comb begin
    if (w_sel) begin
      w_en = xw_en & {BANKS{pmu_ready}};  w_we = xw_we;
      w_addr = xw_addr;                   w_wdata = xw_wdata;
    end else begin
      w_en = ow_en & {BANKS{pmu_ready}};  w_we = '1;
      w_addr = ow_addr;                   w_wdata = ow_wdata;
    end
    if (d_sel) begin
      d_en = xd_en & {BANKS{pmu_ready}};  d_we = xd_we;
      d_addr = xd_addr;                   d_wdata = xd_wdata;
    end else begin
      d_en = od_en & {BANKS{pmu_ready}};  d_we = '1;
      d_addr = od_addr;                   d_wdata = od_wdata;
    end
    a_en    = xa_en & {BANKS{pmu_ready}};
    a_we    = xa_we;
    a_addr  = xa_addr;
    a_wdata = xa_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       err <= '0;
    else if (err_clr) err <= '0;
    else              err <= err | {|a_err, |d_err, |w_err};
  end

  // Nothing may reach a memory while sectors are being switched (this holds
  // in reset as well, so the check is not disabled there).
  a_no_access_while_switching: assert property (
    @(posedge clk) !pmu_ready |-> !(|w_en || |d_en || |a_en));

endmodule
