// decomp_pkg: constants and types shared by the Ising decomposer.
//
// The decomposer reads a global Ising problem stored in compressed sparse
// row (CSR) form over a 128-bit AXI4 read bus. A neighbor entry is 16 bits,
// {id, weight}, so one bus beat holds P = 8 entries, one per processing lane.
// Row pointers are 32-bit words. Spins are one bit: 1 stands for s = +1 and
// 0 for s = -1. The local field h_i of spin i is kept as the diagonal entry
// (id == i) of row i.
//
// Bus width 128 and P = 8 follow the paper. The 16-bit entry (11-bit id,
// 5-bit signed weight) is this design's choice: it makes P equal the number
// of entries per beat, as in the lane picture of the clamping engine.
package decomp_pkg;

  parameter int unsigned AXI_W    = 128;            // AXI data width (bits)
  parameter int unsigned ENTRY_W  = 16;             // one CSR neighbor entry
  parameter int unsigned P        = AXI_W / ENTRY_W; // lanes / PEs per beat
  parameter int unsigned ID_W     = 11;             // spin index width
  parameter int unsigned WGT_W    = ENTRY_W - ID_W; // signed weight width
  parameter int unsigned N_MAX    = 1 << ID_W;      // largest spin count
  parameter int unsigned FIELD_W  = 16;             // h' and field width
  parameter int unsigned ENERGY_W = 32;             // energy accumulator
  parameter int unsigned ADDR_W   = 32;             // AXI byte address
  parameter int unsigned PTR_W    = 32;             // row pointer width
  parameter int unsigned BEAT_B   = AXI_W / 8;      // bytes per beat
  parameter int unsigned WORD_W   = 16;             // link word width

  typedef logic [ID_W-1:0]           id_t;
  typedef logic [ID_W:0]             nspin_t;       // 0 .. N_MAX
  typedef logic signed [WGT_W-1:0]   wgt_t;
  typedef logic signed [FIELD_W-1:0] field_t;
  typedef logic signed [ENERGY_W-1:0] energy_t;

  // One CSR neighbor entry as stored in memory: id in the upper bits.
  typedef struct packed {
    id_t                id;
    logic [WGT_W-1:0]   w;
  } entry_t;

  // One beat of a CSR row as streamed to the clamping and subproblem units.
  typedef struct packed {
    logic [AXI_W-1:0] data;      // P entries, lane l in bits [16l+15:16l]
    logic [P-1:0]     lane_vld;  // entry belongs to the row
    id_t              row;       // global index of the row's spin
    logic             last;      // last beat of the row
  } row_beat_t;

  // Master controller states (names as in the paper's FSM description,
  // plus INIT for the initial random solution and DISPATCH for the transfer).
  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_GTU, S_CLAMP_SUBQ, S_DISPATCH, S_CORE_WAIT, S_FEEDBACK, S_DONE
  } state_t;

  function automatic entry_t lane_entry(logic [AXI_W-1:0] data, int unsigned l);
    return entry_t'(data[l*ENTRY_W +: ENTRY_W]);
  endfunction

endpackage
