// capstore_sram: one separated CapStore memory (weight, data or accumulator),
// banked and cut into power-gated sectors.
//
// The memory has BANKS independent single-port banks, so the accelerator can
// move one word per bank per cycle (one per row/column of the 16x16 array).
// Each bank holds SECTORS * SECTOR_BYTES words and is split into SECTORS equal
// sectors; bank-local word address a lies in sector a / SECTOR_BYTES. Sector s
// of every bank is powered by the same sleep transistor, whose state arrives
// on sector_on[s] (1 = powered and usable).
//
// Interface, per bank b: en[b] starts an access at addr[b]; we[b] makes it a
// write of wdata[b]. Timing: a write lands at the clock edge; a read returns
// rdata[b] one cycle after en[b]. An access to an unpowered sector or past the
// end of the bank is dropped (no write, read data 0) and raises err[b] in the
// same cycle the read data would appear. A sector that loses power loses its
// contents: after wake-up its words must be rewritten before they are read
// (the contents of the modelled array are simply left as they were).
//
// Bank count and sector organisation follow the paper (PG-SEP). The word
// width, the address-to-sector mapping (consecutive words in one sector), the
// read latency and the error flag are this design's own choices.
module capstore_sram #(
  parameter int unsigned BANKS        = capstore_pkg::NUM_BANKS,
  parameter int unsigned SECTORS      = capstore_pkg::A_SECTORS,
  parameter int unsigned SECTOR_BYTES = capstore_pkg::A_SECTOR_BYTES,
  parameter int unsigned WIDTH        = capstore_pkg::WORD_W,
  localparam int unsigned DEPTH       = SECTORS * SECTOR_BYTES,
  localparam int unsigned AW          = $clog2(DEPTH)
) (
  input  logic                         clk,
  input  logic [SECTORS-1:0]           sector_on,
  input  logic [BANKS-1:0]             en,
  input  logic [BANKS-1:0]             we,
  input  logic [BANKS-1:0][AW-1:0]     addr,
  input  logic [BANKS-1:0][WIDTH-1:0]  wdata,
  output logic [BANKS-1:0][WIDTH-1:0]  rdata,
  output logic [BANKS-1:0]             err
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    logic             in_range;
    logic             powered;
    logic             ok;

    always_comb begin
      in_range = 32'(addr[b]) < DEPTH;
      powered  = 1'b0;
      if (in_range) powered = sector_on[32'(addr[b]) / SECTOR_BYTES];
      ok = en[b] && powered;
    end

    always_ff @(posedge clk) begin
      if (ok && we[b]) mem[addr[b]] <= wdata[b];
      rdata[b] <= (ok && !we[b]) ? mem[addr[b]] : '0;
      err[b]   <= en[b] && !powered;
    end
  end

endmodule
