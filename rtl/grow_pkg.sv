// grow_pkg: widths and record layouts shared by the GROW sparse-dense GEMM
// accelerator. Data words are 64-bit two's-complement integers (the 64-bit MAC
// width and the 16 MAC lanes follow the published configuration; the integer
// number format is this design's choice). One DRAM beat carries 1024 bits,
// which is exactly one dense RHS/output row of 16 words, so a 1 GHz clock gives
// 128 GB/s of memory bandwidth.
//
// DRAM record of one CSR nonzero (16 bytes, eight per beat):
//   [63:0]  value   [95:64] column (= RHS row ID)   [126] last nonzero of its row
//   [127]   empty-row marker (the row has no nonzeros; value/column ignored)
// The last-in-row flag stands in for the CSR row-pointer array: rows are
// consumed strictly in order, so the flag carries the same information.
// HDN ID list in DRAM: one node ID per 32-bit word (low 24 bits), 32 per beat.
//
// Lint notes: some constants here document the memory layout (address
// width, records per beat, IDs per beat, bytes per row) and are not used by
// every module that imports the package; bits 125:96 of a nonzero record are
// reserved padding and unpack_nz ignores them.
package grow_pkg;
  parameter int DATA_W       = 64;    // MAC width
  parameter int LANES        = 16;    // number of MACs = elements per dense row
  parameter int MEM_W        = 1024;  // bits per DRAM beat
  parameter int ADDR_W       = 32;    // byte address
  parameter int ID_W         = 24;    // node ID held in the HDN ID list (3 bytes)
  parameter int RID_W        = 32;    // RHS row ID as held in the LDN table
  parameter int NZ_PER_BEAT  = MEM_W / 128;  // 8 nonzero records per beat
  parameter int IDS_PER_BEAT = MEM_W / 32;   // 32 HDN IDs per beat
  parameter int ROW_BYTES    = LANES * DATA_W / 8;  // 128

  typedef logic [DATA_W-1:0]            word_t;
  typedef logic [LANES-1:0][DATA_W-1:0] row_t;

  // One nonzero as held on chip.
  typedef struct packed {
    logic              empty;  // row without nonzeros
    logic              last;   // last nonzero of its row
    logic [RID_W-1:0]  col;    // column index = RHS row ID
    word_t             val;    // nonzero value
  } nz_t;

  function automatic nz_t unpack_nz(input logic [127:0] rec);
    nz_t n;
    n.val   = rec[63:0];
    n.col   = rec[95:64];
    n.last  = rec[126];
    n.empty = rec[127];
    return n;
  endfunction

  // Event counters of one job (cluster), reported by the control unit.
  typedef struct packed {
    logic [31:0] cycles;        // cycles from start to done
    logic [31:0] hits;          // nonzeros whose RHS row was in the HDN cache
    logic [31:0] misses;        // nonzeros that started a DRAM row fetch
    logic [31:0] merges;        // misses that joined a fetch already in flight
    logic [31:0] ret_macs;      // MACs done with a returned (missed) row
    logic [31:0] runahead;      // rows started while an older row still waited
    logic [31:0] stall_window;  // cycles with every output slot in use
    logic [31:0] stall_table;   // cycles a miss waited for LDN/LHS table space
    logic [31:0] rows_empty;    // rows without nonzeros
    logic [31:0] rows_done;     // rows written back
  } stats_t;
endpackage
