// sleep_transistor: behavioural model of a footer sleep transistor (an analog
// power switch), not synthesizable logic for a real chip.
//
// One such transistor connects the virtual ground of one sector row (the
// same-index sector of every bank) to ground. Its gate is the sleep request
// from the power manager; a sense buffer on the virtual-ground node returns
// the sleep acknowledge. Following the paper's timing diagram, both signals
// are high while the sector is ON and low while it is OFF:
//   sleep_req falls -> after T_SLEEP cycles the rail is down, sleep_ack falls;
//   sleep_req rises -> after T_WAKEUP cycles the rail is up,  sleep_ack rises.
// sector_on is 1 only while the rail is fully up (the diagram shows the sector
// power undefined during both transitions); the memory treats any other
// moment as unpowered. A request withdrawn before the acknowledge has
// changed cancels that transition.
//
// The transition times are not given by the paper; the defaults are assumed
// and counted in clock cycles. Reset models a chip powering up with every
// sector off.
module sleep_transistor #(
  parameter int unsigned T_SLEEP  = 2,
  parameter int unsigned T_WAKEUP = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sleep_req,   // 1 = keep the sector powered (gate driven on)
  output logic sleep_ack,   // follows sleep_req once the rail has settled
  output logic sector_on    // rail fully up
);

  localparam int unsigned CW = $clog2((T_SLEEP > T_WAKEUP ? T_SLEEP : T_WAKEUP) + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sleep_ack <= 1'b0;
      cnt       <= '0;
    end else if (sleep_req == sleep_ack) begin
      cnt <= '0;
    end else if (sleep_req && 32'(cnt) + 1 >= T_WAKEUP) begin
      sleep_ack <= 1'b1;
      cnt       <= '0;
    end else if (!sleep_req && 32'(cnt) + 1 >= T_SLEEP) begin
      sleep_ack <= 1'b0;
      cnt       <= '0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  assign sector_on = sleep_ack && sleep_req;

endmodule
