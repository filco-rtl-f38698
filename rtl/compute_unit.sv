// compute_unit: one FILCO Compute Unit (CU).
//
// A CU is K AIE kernels, a CU buffer with two sets of LHS/RHS/OUT tiles,
// a Mesh Manager and an instruction decoder. Like the FMU, each CU
// instruction names one operation for buffer set 0 (ping) and one for set 1
// (pong); both run at once and the instruction retires when both finish,
// so the CU can load the next operands while the AIEs work on the current
// ones. Operations (filco_pkg::cu_op_e):
//   CU_LOAD_LHS  take `count` words (2bi x 8bk, row-major) from FMU src_fmu
//   CU_LOAD_RHS  take `count` words (8bk x 8bj*K, row-major) from src_fmu and
//                split the columns into the K RHS banks, 8bj columns each
//   CU_COMPUTE   run the K AIEs on this set with bounds bi/bk/bj; acc adds
//                the product to OUT (accumulation over the k dimension)
//   CU_STORE     send the whole OUT tile (2bi x 8bj*K words, row-major,
//                gathered from the K banks) to FMU des_fmu; its length
//                comes from the bounds so that `count` stays free for a
//                load running in the other set
// The CU tile is therefore (2bi) x (8bk) x (8bj*K), chosen per instruction.
// Streams move one word per cycle. After an is_last instruction `done`
// stays high until `clear`.
//
// From the paper: the CU contents (AIE array, CU buffer, Mesh Manager), the
// instruction fields is_last, ping_op, pong_op, src_fmu, des_fmu, count and
// run-time loop bounds set by instruction. Own choices: the bound and acc
// fields carried in the CU instruction, the opcode set, the 1 x K mesh, and
// the rules (asserted) that one instruction loads at most once, stores at
// most once and computes at most once.
module compute_unit
  import filco_pkg::*;
#(
  parameter int N_FMU    = 9,
  parameter int K_AIE    = 8,
  parameter int IQ_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  output logic             done,
  output logic             idle,
  // instruction stream
  input  logic             instr_valid,
  output logic             instr_ready,
  input  iword_t           instr_data,
  // from FMUs
  input  logic [N_FMU-1:0] fmu_in_valid,
  output logic [N_FMU-1:0] fmu_in_ready,
  input  data_t            fmu_in_data [N_FMU],
  // to FMUs (data shared)
  output logic [N_FMU-1:0] fmu_out_valid,
  input  logic [N_FMU-1:0] fmu_out_ready,
  output data_t            fmu_out_data,
  // observation
  output logic [K_AIE-1:0] aie_computing
);
  // ------------------------------------------------------------ decoder
  logic      q_valid, q_ready, busy;
  iword_t    q_data;
  cu_instr_t qi, ins;

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_q (
    .clk, .rst_n, .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data));

  assign qi      = cu_instr_t'(q_data[$bits(cu_instr_t)-1:0]);
  assign q_ready = !busy;
  assign idle    = !busy && !q_valid;

  cu_op_e      op     [2];
  logic        active [2];
  logic        mm_go  [2];     // COMPUTE: mesh manager already started
  count_t      idx    [2];
  cu_addr_t    rbase  [2];
  logic [4:0]  colb   [2];     // column inside the current bank
  logic [7:0]  bank   [2];
  logic        fire   [2];
  cu_addr_t    laddr  [2];

  logic [5:0]  bw;             // 8 * bound_j: bank width in columns
  count_t      st_len;         // OUT words: 2bi x 8bj*K
  assign bw     = {ins.bound_j, 3'b000};
  assign st_len = count_t'(32'(ins.bound_i) * 32'(ins.bound_j) * 32'd16 * 32'(K_AIE));

  // ------------------------------------------------------------ datapath
  logic      ld_we, ld_set, ld_rhs, mm_start, mm_busy, mm_done, mm_set;
  logic [7:0] ld_bank, st_bank;
  cu_addr_t  ld_addr, st_addr;
  logic      st_set;
  data_t     st_data;

  logic      mr_set, mw_we, mw_set, mw_acc;
  cu_addr_t  mr_lhs_addr, mr_rhs_addr, mw_addr;
  data_t     mr_lhs_data;
  data_t     mr_rhs_data [K_AIE];
  data_t     mw_data     [K_AIE];

  logic [K_AIE-1:0] in0_valid, in0_ready, in1_valid, in1_ready, out0_valid, out0_ready;
  data_t     in0_data;
  data_t     in1_data  [K_AIE];
  data_t     out0_data [K_AIE];

  always_comb begin
    fmu_in_ready  = '0;
    fmu_out_valid = '0;
    ld_we = 1'b0; ld_set = 1'b0; ld_rhs = 1'b0; ld_bank = '0; ld_addr = '0;
    st_set = 1'b0; st_bank = '0; st_addr = '0;
    mm_start = 1'b0; mm_set = 1'b0;
    for (int b = 0; b < 2; b++) begin
      laddr[b] = (op[b] == CU_LOAD_LHS) ? cu_addr_t'(idx[b]) : cu_addr_t'(rbase[b] + cu_addr_t'(colb[b]));
      fire[b]  = 1'b0;
      if (active[b]) begin
        case (op[b])
          CU_LOAD_LHS, CU_LOAD_RHS: begin
            fmu_in_ready[ins.src_fmu] = 1'b1;
            fire[b] = fmu_in_valid[ins.src_fmu];
            ld_we   = fire[b];
            ld_set  = 1'(b);
            ld_rhs  = (op[b] == CU_LOAD_RHS);
            ld_bank = bank[b];
            ld_addr = laddr[b];
          end
          CU_STORE: begin
            fmu_out_valid[ins.des_fmu] = 1'b1;
            fire[b] = fmu_out_ready[ins.des_fmu];
            st_set  = 1'(b);
            st_bank = bank[b];
            st_addr = laddr[b];
          end
          CU_COMPUTE: begin
            mm_start = !mm_go[b];
            mm_set   = 1'(b);
          end
          default: ;
        endcase
      end
    end
  end
  assign fmu_out_data = st_data;

  cu_buffer #(.K_AIE(K_AIE)) u_buf (
    .clk,
    .ld_we, .ld_set, .ld_rhs, .ld_bank, .ld_addr, .ld_data(fmu_in_data[ins.src_fmu]),
    .st_set, .st_bank, .st_addr, .st_data,
    .mr_set, .mr_lhs_addr, .mr_lhs_data, .mr_rhs_addr, .mr_rhs_data,
    .mw_we, .mw_set, .mw_acc, .mw_addr, .mw_data);

  mesh_manager #(.K_AIE(K_AIE)) u_mesh (
    .clk, .rst_n, .start(mm_start), .set(mm_set),
    .bi(ins.bound_i), .bk(ins.bound_k), .bj(ins.bound_j), .acc(ins.acc),
    .busy(mm_busy), .done(mm_done),
    .mr_set, .mr_lhs_addr, .mr_lhs_data, .mr_rhs_addr, .mr_rhs_data,
    .mw_we, .mw_set, .mw_acc, .mw_addr, .mw_data,
    .in0_valid, .in0_ready, .in0_data, .in1_valid, .in1_ready, .in1_data,
    .out0_valid, .out0_ready, .out0_data);

  for (genvar a = 0; a < K_AIE; a++) begin : g_aie
    aie_kernel u_aie (
      .clk, .rst_n,
      .in0_valid(in0_valid[a]), .in0_ready(in0_ready[a]), .in0_data(in0_data),
      .in1_valid(in1_valid[a]), .in1_ready(in1_ready[a]), .in1_data(in1_data[a]),
      .out0_valid(out0_valid[a]), .out0_ready(out0_ready[a]), .out0_data(out0_data[a]),
      .computing(aie_computing[a]));
  end

  // ------------------------------------------------------------ control
  function automatic logic op_empty(cu_op_e o, cu_instr_t i);
    if (o == CU_NOP) return 1'b1;
    if (o == CU_COMPUTE || o == CU_STORE) return 1'b0;
    return i.count == 0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; ins <= '0;
      for (int b = 0; b < 2; b++) begin
        op[b] <= CU_NOP; active[b] <= 1'b0; mm_go[b] <= 1'b0; idx[b] <= '0;
        rbase[b] <= '0; colb[b] <= '0; bank[b] <= '0;
      end
    end else begin
      if (clear) done <= 1'b0;
      if (!busy) begin
        if (q_valid) begin
          ins       <= qi;
          busy      <= 1'b1;
          op[0]     <= qi.ping_op;
          op[1]     <= qi.pong_op;
          active[0] <= !op_empty(qi.ping_op, qi);
          active[1] <= !op_empty(qi.pong_op, qi);
          for (int b = 0; b < 2; b++) begin
            mm_go[b] <= 1'b0; idx[b] <= '0; rbase[b] <= '0; colb[b] <= '0; bank[b] <= '0;
          end
        end
      end else begin
        for (int b = 0; b < 2; b++) begin
          if (fire[b]) begin
            idx[b] <= idx[b] + 1'b1;
            if (idx[b] + 1'b1 == ((op[b] == CU_STORE) ? st_len : ins.count)) active[b] <= 1'b0;
            // walk the columns of the row across the K banks
            if (colb[b] + 1'b1 == 5'(bw)) begin
              colb[b] <= '0;
              if (bank[b] == 8'(K_AIE - 1)) begin
                bank[b]  <= '0;
                rbase[b] <= rbase[b] + cu_addr_t'(bw);
              end else bank[b] <= bank[b] + 1'b1;
            end else colb[b] <= colb[b] + 1'b1;
          end
          if (active[b] && op[b] == CU_COMPUTE) begin
            if (mm_start && mm_set == 1'(b)) mm_go[b] <= 1'b1;
            if (mm_go[b] && mm_done) active[b] <= 1'b0;
          end
        end
        if (!active[0] && !active[1]) begin
          busy <= 1'b0;
          if (ins.is_last) done <= 1'b1;
        end
      end
    end
  end

  a_one_load: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && q_valid) |-> !((qi.ping_op inside {CU_LOAD_LHS, CU_LOAD_RHS}) &&
                             (qi.pong_op inside {CU_LOAD_LHS, CU_LOAD_RHS})));
  a_one_store: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && q_valid) |-> !(qi.ping_op == CU_STORE && qi.pong_op == CU_STORE));
  a_one_compute: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && q_valid) |-> !(qi.ping_op == CU_COMPUTE && qi.pong_op == CU_COMPUTE));
  a_mesh_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    mm_start |-> !mm_busy);
endmodule
