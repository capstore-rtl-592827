// pg_sector_group: drives the sleep transistors of one CapStore memory.
//
// The memory's SECTORS sector rows are switched as a thermometer: for a target
// of k sectors, sectors 0 .. k-1 are kept ON and the rest are put to sleep, so
// the live data of an operation always occupies the low sectors. On load the
// new target is taken and sleep_req is updated at the next clock edge (1 = ON,
// 0 = sleep, as in the paper's timing diagram). settled is high when every
// sleep_ack agrees with its sleep_req, i.e. every requested ON -> OFF and
// OFF -> ON transition of the handshake has completed. A sector whose request
// changes at an edge cannot have its acknowledge changed at that same edge, so
// settled falls in the first cycle after a load that changes anything.
// Reset turns every sector off. Keeping the lowest sectors on is this
// design's choice; the paper says only that unused sectors are gated.
module pg_sector_group #(
  parameter int unsigned SECTORS = 16,
  localparam int unsigned CW     = $clog2(SECTORS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [CW-1:0]      target,     // sectors to keep on, 0 .. SECTORS
  output logic [SECTORS-1:0] sleep_req,
  input  logic [SECTORS-1:0] sleep_ack,
  output logic               settled
);

  function automatic logic [SECTORS-1:0] thermo(logic [CW-1:0] k);
    logic [SECTORS-1:0] m;
    for (int unsigned i = 0; i < SECTORS; i++) m[i] = (i < 32'(k));
    return m;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sleep_req <= '0;
    end else if (load) begin
      sleep_req <= thermo(target);
    end
  end

  assign settled = (sleep_ack == sleep_req);

endmodule
