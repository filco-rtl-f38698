// filco_pkg: types and constants shared by every FILCO unit.
//
// FILCO splits a matrix-multiply accelerator into three kinds of function
// units that are programmed at run time by instructions: the IO Manager
// (moves tiles between off-chip memory and on-chip buffers), Flexible Memory
// Units (1-D double buffers whose 2-D view is set per instruction) and
// Compute Units (a group of AIE kernels with a block-partitioned buffer).
// This package holds the instruction formats of all of them. The field
// lists follow the paper's instruction table (Instr Generator, IOM Loader,
// IOM Storer, FMU, CU); field widths, opcode encodings, the FMU row pitch
// `ld`, the CU loop bounds and accumulate flag are this design's own
// choices. Every instruction travels as one INSTR_W-bit word, the struct in
// the low bits and zeros above.
//
// Unit numbering used in the Instr Generator header (des_unit):
//   0 = IOM loader, 1 = IOM storer, 2 .. 2+N_FMU-1 = FMUs,
//   2+N_FMU .. 2+N_FMU+N_CU-1 = CUs.
package filco_pkg;

  // Data element: the paper computes in FP32; this design uses 32-bit
  // two's-complement integers so that results are exact and cheap to check.
  parameter int DATA_W  = 32;
  typedef logic [DATA_W-1:0] data_t;

  parameter int INSTR_W = 128;
  typedef logic [INSTR_W-1:0] iword_t;

  typedef logic [11:0] dim_t;     // matrix dimensions and tile corners
  typedef logic [15:0] count_t;   // element counts
  typedef logic [7:0]  unit_t;    // unit indices (FMU, CU or des_unit)

  // Atomic AIE operation: 2 x 8 x 8 (rows x depth x cols), from the paper.
  parameter int ATOM_I = 2;
  parameter int ATOM_K = 8;
  parameter int ATOM_J = 8;
  // Largest tile one AIE kernel holds: 32 x 32 x 32, from the paper's
  // single-AIE experiment range. Bound fields count atomic steps.
  parameter int AIE_MAX_I = 32;
  parameter int AIE_MAX_K = 32;
  parameter int AIE_MAX_J = 32;
  parameter int BI_MAX = AIE_MAX_I / ATOM_I;   // 16
  parameter int BK_MAX = AIE_MAX_K / ATOM_K;   // 4
  parameter int BJ_MAX = AIE_MAX_J / ATOM_J;   // 4
  // One CU-buffer bank holds one AIE-sized tile.
  parameter int CU_TILE = AIE_MAX_I * AIE_MAX_K;  // 1024 elements
  parameter int CU_AW   = $clog2(CU_TILE);
  typedef logic [CU_AW-1:0] cu_addr_t;

  // ---------------- Instr Generator header ----------------
  typedef struct packed {
    logic   is_last;        // last header of the program
    unit_t  des_unit;       // destination unit of the following words
    count_t valid_length;   // number of instruction words that follow
  } ig_hdr_t;

  // ---------------- IOM Loader / Storer ----------------
  typedef struct packed {
    logic        is_last;
    logic [31:0] ddr_addr;  // byte address of element (0,0) of the matrix
    unit_t       fmu;       // des_fmu (loader) or src_fmu (storer)
    dim_t        m;         // matrix rows in off-chip memory
    dim_t        n;         // matrix columns (row pitch) in off-chip memory
    dim_t        start_row;
    dim_t        end_row;   // exclusive
    dim_t        start_col;
    dim_t        end_col;   // exclusive
  } iom_instr_t;

  // ---------------- FMU ----------------
  typedef enum logic [2:0] {
    FMU_NOP      = 3'd0,
    FMU_RECV_IOM = 3'd1,   // receive `count` elements from the IOM loader
    FMU_SEND_CU  = 3'd2,   // gather the tile view and send it to des_cu
    FMU_RECV_CU  = 3'd3,   // receive results from src_cu, scatter into the tile view
    FMU_SEND_IOM = 3'd4    // send `count` elements to the IOM storer
  } fmu_op_e;

  typedef struct packed {
    logic    is_last;
    fmu_op_e ping_op;      // operation on buffer 0
    fmu_op_e pong_op;      // operation on buffer 1
    unit_t   src_cu;
    unit_t   des_cu;
    count_t  count;
    dim_t    start_row;
    dim_t    end_row;      // exclusive
    dim_t    start_col;
    dim_t    end_col;      // exclusive
    dim_t    ld;           // row pitch of the 1-D buffer view (own choice)
  } fmu_instr_t;

  // ---------------- CU ----------------
  typedef enum logic [2:0] {
    CU_NOP      = 3'd0,
    CU_LOAD_LHS = 3'd1,    // receive `count` LHS elements from src_fmu
    CU_LOAD_RHS = 3'd2,    // receive `count` RHS elements from src_fmu
    CU_COMPUTE  = 3'd3,    // run the AIE array on this buffer set
    CU_STORE    = 3'd4     // send the OUT tile (2bi x 8bj*K words) to des_fmu
  } cu_op_e;

  typedef struct packed {
    logic       is_last;
    cu_op_e     ping_op;   // operation on buffer set 0
    cu_op_e     pong_op;   // operation on buffer set 1
    unit_t      src_fmu;
    unit_t      des_fmu;
    count_t     count;
    logic [4:0] bound_i;   // atomic steps in i (1..16)
    logic [2:0] bound_k;   // atomic steps in k (1..4)
    logic [2:0] bound_j;   // atomic steps in j per AIE (1..4)
    logic       acc;       // COMPUTE adds into OUT instead of overwriting
  } cu_instr_t;

endpackage
