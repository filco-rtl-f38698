// cu_buffer: the CU Buffer of one Compute Unit.
//
// Holds, for each of two buffer sets (ping = 0, pong = 1), one LHS tile, one
// RHS tile and one OUT tile, each sized for the largest tile an AIE
// handles (32x32 elements). RHS and OUT are block-partitioned into K banks,
// bank a holding the column block that AIE a works on, so that all K AIEs
// can be fed and drained in the same cycle; LHS is broadcast and needs one
// bank. Ports:
//   ld_*  write port used when a tile arrives from an FMU (LHS or RHS bank)
//   st_*  read port used when OUT is sent back to an FMU
//   mr_*  mesh read: one LHS element and the same address of every RHS bank
//   mw_*  mesh write: the same address of every OUT bank, either written
//         or, with mw_acc, added to what is there (partial sums over k)
// Reads are combinational, writes take effect at the clock edge.
//
// The paper states that CU buffers hold LHS, RHS and OUT, are sized for the
// largest AIE tile and are block partitioned. The two sets, the
// accumulate-on-write mode and the port set are this design's choices.
module cu_buffer
  import filco_pkg::*;
#(
  parameter int K_AIE = 8
) (
  input  logic                     clk,
  // load port (from FMU)
  input  logic                     ld_we,
  input  logic                     ld_set,
  input  logic                     ld_rhs,     // 0: LHS, 1: RHS bank ld_bank
  input  logic [7:0]               ld_bank,
  input  cu_addr_t                 ld_addr,
  input  data_t                    ld_data,
  // store port (to FMU)
  input  logic                     st_set,
  input  logic [7:0]               st_bank,
  input  cu_addr_t                 st_addr,
  output data_t                    st_data,
  // mesh read
  input  logic                     mr_set,
  input  cu_addr_t                 mr_lhs_addr,
  output data_t                    mr_lhs_data,
  input  cu_addr_t                 mr_rhs_addr,
  output data_t                    mr_rhs_data [K_AIE],
  // mesh write
  input  logic                     mw_we,
  input  logic                     mw_set,
  input  logic                     mw_acc,
  input  cu_addr_t                 mw_addr,
  input  data_t                    mw_data [K_AIE]
);
  data_t lhs [2][CU_TILE];
  data_t rhs [2][K_AIE][CU_TILE];
  data_t out [2][K_AIE][CU_TILE];

  assign st_data     = out[st_set][st_bank][st_addr];
  assign mr_lhs_data = lhs[mr_set][mr_lhs_addr];
  always_comb
    for (int a = 0; a < K_AIE; a++) mr_rhs_data[a] = rhs[mr_set][a][mr_rhs_addr];

  always_ff @(posedge clk) begin
    if (ld_we && !ld_rhs) lhs[ld_set][ld_addr] <= ld_data;
    if (ld_we &&  ld_rhs) rhs[ld_set][ld_bank][ld_addr] <= ld_data;
    if (mw_we)
      for (int a = 0; a < K_AIE; a++)
        out[mw_set][a][mw_addr] <= mw_acc ? out[mw_set][a][mw_addr] + mw_data[a] : mw_data[a];
  end
endmodule
