// capstore_pkg: types and constants shared by the CapStore on-chip memory.
//
// CapStore is the on-chip SRAM of a CapsuleNet inference accelerator. The
// organisation built here is the power-gated separated one (PG-SEP): three
// single-port memories (weights, data, accumulator partial sums), each cut into
// 16 banks, each bank cut into S equal sectors. The sectors that share an index
// across the 16 banks share one sleep transistor, so power is switched per
// "sector row" of N bank slices.
//
// The bank counts, sector counts and byte sizes below are the paper's PG-SEP
// numbers. The 8-bit word, the operation encoding and the per-operation
// sector table are this design's own choices; the table is derived from the
// memory-usage analysis as explained next to sectors_needed().
package capstore_pkg;

  // Banks per memory, matching the 16x16 systolic array (paper: N = 16).
  localparam int unsigned NUM_BANKS = 16;

  // Weight memory: 110592 B, 64 sectors per bank -> 108 B per bank-sector.
  localparam int unsigned W_SECTORS      = 64;
  localparam int unsigned W_SECTOR_BYTES = 108;
  // Data memory: 25600 B, 16 sectors per bank -> 100 B per bank-sector.
  localparam int unsigned D_SECTORS      = 16;
  localparam int unsigned D_SECTOR_BYTES = 100;
  // Accumulator memory: 460800 B, 128 sectors per bank -> 225 B per bank-sector.
  localparam int unsigned A_SECTORS      = 128;
  localparam int unsigned A_SECTOR_BYTES = 225;

  // Word width of every bank (one byte; sizes in the paper are in bytes).
  localparam int unsigned WORD_W = 8;

  // The five operations of CapsuleNet inference that the power manager
  // distinguishes. Sum+Squash and Update+Softmax repeat once per routing
  // iteration.
  typedef enum logic [2:0] {
    OP_C1   = 3'd0,  // Conv1
    OP_PC   = 3'd1,  // PrimaryCaps
    OP_CCFC = 3'd2,  // ClassCaps fully connected
    OP_SSQ  = 3'd3,  // Sum + Squash
    OP_USO  = 3'd4   // Update + Softmax
  } op_e;

  localparam int unsigned NUM_OPS = 5;

  // The three separated memories.
  typedef enum logic [1:0] {
    MEM_W = 2'd0,
    MEM_D = 2'd1,
    MEM_A = 2'd2
  } mem_e;

  // Bytes each memory has to hold during each operation. Printed values of
  // the paper: the largest need of each memory equals its size (weights 110592
  // in ClassCaps, data 25600 in Conv1, accumulator 460800 in PrimaryCaps), the
  // smallest need equals the hybrid organisation's separate memories (1024 B
  // weights in Conv1/PrimaryCaps, 1024 B data in ClassCaps, 204800 B
  // accumulator in ClassCaps and the routing steps), and the total use per
  // operation is 73.6 / 100 / 67.2 / 47.9 / 47.9 % of 471040 B. The remaining
  // entries are solved from those totals:
  //   PrimaryCaps data      = 471040 - 460800 - 1024         = 9216
  //   Conv1 accumulator     = 0.736*471040 - 25600 - 1024    = 320061
  //   routing data          = 9216 (bar level equal to PrimaryCaps)
  //   routing weights       = 0.479*471040 - 204800 - 9216   = 11612
  function automatic int unsigned bytes_needed(op_e op, mem_e mem);
    unique case (mem)
      MEM_W: unique case (op)
        OP_C1, OP_PC:   return 1024;
        OP_CCFC:        return 110592;
        default:        return 11612;
      endcase
      MEM_D: unique case (op)
        OP_C1:          return 25600;
        OP_CCFC:        return 1024;
        default:        return 9216;
      endcase
      default: unique case (op)
        OP_C1:          return 320061;
        OP_PC:          return 460800;
        default:        return 204800;
      endcase
    endcase
  endfunction

  // Sectors to keep on: the need rounded up to whole sector rows
  // (NUM_BANKS * bank-sector bytes). Results: weights 1/1/64/7/7,
  // data 16/6/1/6/6, accumulator 89/128/57/57/57 for C1/PC/CC-FC/S+Sq/U+So.
  function automatic int unsigned sectors_needed(op_e op, mem_e mem);
    int unsigned row_bytes;
    unique case (mem)
      MEM_W:   row_bytes = NUM_BANKS * W_SECTOR_BYTES;
      MEM_D:   row_bytes = NUM_BANKS * D_SECTOR_BYTES;
      default: row_bytes = NUM_BANKS * A_SECTOR_BYTES;
    endcase
    return (bytes_needed(op, mem) + row_bytes - 1) / row_bytes;
  endfunction

endpackage
