// capstore_pmu: application-aware power management unit of CapStore.
//
// The PMU knows, for each of the five CapsuleNet operations (Conv1,
// PrimaryCaps, ClassCaps-FC, Sum+Squash, Update+Softmax), how many sector rows
// of the weight, data and accumulator memories that operation uses. When the
// accelerator's control unit announces the next operation (op_start with op),
// the PMU loads the three sector counts into one pg_sector_group per memory,
// which lowers the sleep request of every sector no longer needed and raises
// it for every sector that is needed again. Each sleep transistor answers with
// its acknowledge; ready is high once all of them have answered, and read or
// write traffic must wait for it (the memory controller enforces this).
// Transitions therefore happen only at operation boundaries, as in the paper.
//
// The per-operation table resets to the values of capstore_pkg::sectors_needed
// and can be rewritten through the cfg_* port (one entry per cycle), so the
// same hardware can be set up for another network. After reset every sector is
// off and ready is high until the first op_start. w_on / d_on / a_on report
// the number of sectors currently requested on.
//
// The handshake and the application-driven table follow the paper; the
// programmable table, the thermometer sector order and the port encoding are
// this design's choices.
module capstore_pmu
  import capstore_pkg::*;
#(
  parameter int unsigned WS = W_SECTORS,
  parameter int unsigned DS = D_SECTORS,
  parameter int unsigned AS = A_SECTORS,
  localparam int unsigned WCW = $clog2(WS + 1),
  localparam int unsigned DCW = $clog2(DS + 1),
  localparam int unsigned ACW = $clog2(AS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // operation announcement from the accelerator control unit
  input  logic           op_start,
  input  op_e            op,
  // table programming
  input  logic           cfg_we,
  input  op_e            cfg_op,
  input  mem_e           cfg_mem,
  input  logic [7:0]     cfg_sectors,
  // sleep transistors
  output logic [WS-1:0]  w_sleep_req,
  input  logic [WS-1:0]  w_sleep_ack,
  output logic [DS-1:0]  d_sleep_req,
  input  logic [DS-1:0]  d_sleep_ack,
  output logic [AS-1:0]  a_sleep_req,
  input  logic [AS-1:0]  a_sleep_ack,
  // status
  output logic           ready,
  output logic [WCW-1:0] w_on,
  output logic [DCW-1:0] d_on,
  output logic [ACW-1:0] a_on
);

  logic [WCW-1:0] w_tab [NUM_OPS];
  logic [DCW-1:0] d_tab [NUM_OPS];
  logic [ACW-1:0] a_tab [NUM_OPS];

  function automatic int unsigned clip(int unsigned v, int unsigned lim);
    return (v > lim) ? lim : v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NUM_OPS; i++) begin
        w_tab[i] <= WCW'(clip(sectors_needed(op_e'(i), MEM_W), WS));
        d_tab[i] <= DCW'(clip(sectors_needed(op_e'(i), MEM_D), DS));
        a_tab[i] <= ACW'(clip(sectors_needed(op_e'(i), MEM_A), AS));
      end
    end else if (cfg_we && 32'(cfg_op) < NUM_OPS) begin
      unique case (cfg_mem)
        MEM_W:   w_tab[cfg_op] <= WCW'(clip(32'(cfg_sectors), WS));
        MEM_D:   d_tab[cfg_op] <= DCW'(clip(32'(cfg_sectors), DS));
        MEM_A:   a_tab[cfg_op] <= ACW'(clip(32'(cfg_sectors), AS));
        default: ;
      endcase
    end
  end

  logic load;
  logic w_ok, d_ok, a_ok;

  assign load = op_start && (32'(op) < NUM_OPS);

  pg_sector_group #(.SECTORS(WS)) u_w (
    .clk, .rst_n, .load, .target(w_tab[op]),
    .sleep_req(w_sleep_req), .sleep_ack(w_sleep_ack), .settled(w_ok)
  );
  pg_sector_group #(.SECTORS(DS)) u_d (
    .clk, .rst_n, .load, .target(d_tab[op]),
    .sleep_req(d_sleep_req), .sleep_ack(d_sleep_ack), .settled(d_ok)
  );
  pg_sector_group #(.SECTORS(AS)) u_a (
    .clk, .rst_n, .load, .target(a_tab[op]),
    .sleep_req(a_sleep_req), .sleep_ack(a_sleep_ack), .settled(a_ok)
  );

  assign ready = w_ok && d_ok && a_ok;

  always_comb begin
    w_on = '0;
    d_on = '0;
    a_on = '0;
    for (int unsigned i = 0; i < WS; i++) w_on += WCW'(w_sleep_req[i]);
    for (int unsigned i = 0; i < DS; i++) d_on += DCW'(d_sleep_req[i]);
    for (int unsigned i = 0; i < AS; i++) a_on += ACW'(a_sleep_req[i]);
  end

endmodule
