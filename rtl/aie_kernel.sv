// aie_kernel: one AI Engine tile running FILCO's flexible-bound MM kernel.
//
// The paper programs every AIE with one kernel whose loop bounds arrive at
// run time: it first reads a 3-word vector {bound_i, bound_k, bound_j} from
// its in0 buffer, then runs  for i < bound_i, for j < bound_j, for k <
// bound_k: one atomic 2x8x8 multiply-accumulate. The tile it computes is
// therefore (2*bound_i) x (8*bound_k) x (8*bound_j), anything from 2x8x8 up
// to 32x32x32, with no padding to a fixed tile. This module gives that
// kernel's behaviour as synthesizable logic in place of the AIE processor
// (which is vendor hard IP):
//   in0: bound_i, bound_k, bound_j, then LHS (2bi x 8bk), row-major
//   in1: RHS (8bk x 8bj), row-major, accepted once the bounds are known
//   out0: OUT = LHS x RHS (2bi x 8bj), row-major, after the compute phase
// An atomic 2x8x8 operation takes 16 cycles: each cycle one LHS element
// times an 8-wide RHS row is added into an 8-wide OUT row (8 MACs/cycle,
// the FP32 MAC rate of an AIE, an assumption taken from the AIE's
// documented rate, not from the paper). The compute phase lasts exactly
// 16*bi*bj*bk cycles. Data are 32-bit integers here, FP32 in the paper.
// The kernel accepts a new tile as soon as the previous OUT has left.
module aie_kernel
  import filco_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in0_valid,
  output logic  in0_ready,
  input  data_t in0_data,
  input  logic  in1_valid,
  output logic  in1_ready,
  input  data_t in1_data,
  output logic  out0_valid,
  input  logic  out0_ready,
  output data_t out0_data,
  output logic  computing      // high during the compute phase
);
  localparam int NV = AIE_MAX_I * AIE_MAX_J / ATOM_J;   // 8-wide rows of OUT / RHS

  typedef logic [ATOM_J-1:0][DATA_W-1:0] vec_t;

  data_t lhs_mem [AIE_MAX_I*AIE_MAX_K];
  vec_t  rhs_mem [NV];
  vec_t  out_mem [NV];

  typedef enum logic [1:0] {S_RECV, S_COMP, S_OUT} state_e;
  state_e state;

  logic [1:0]  hdr_cnt;
  logic [4:0]  bi;       // 1..16
  logic [2:0]  bk, bj;   // 1..4
  logic [10:0] lhs_cnt, rhs_cnt, out_cnt;
  logic [10:0] lhs_len, rhs_len, out_len;
  // loop counters
  logic [3:0]  ci;
  logic [1:0]  cj, ck;
  logic        cr;
  logic [2:0]  ckk;

  assign lhs_len = 11'(bi) * 11'(bk) * 11'd16;   // 2bi * 8bk
  assign rhs_len = 11'(bk) * 11'(bj) * 11'd64;   // 8bk * 8bj
  assign out_len = 11'(bi) * 11'(bj) * 11'd16;   // 2bi * 8bj

  logic lhs_full, rhs_full;
  assign lhs_full  = (hdr_cnt == 2'd3) && (lhs_cnt == lhs_len);
  assign rhs_full  = (hdr_cnt == 2'd3) && (rhs_cnt == rhs_len);
  assign in0_ready = (state == S_RECV) && !lhs_full;
  assign in1_ready = (state == S_RECV) && (hdr_cnt == 2'd3) && !rhs_full;
  assign computing = (state == S_COMP);

  // compute datapath: one LHS scalar x one RHS row into one OUT row
  logic [5:0]  arow;      // 2i + r
  logic [4:0]  akcol;     // 8k + kk
  logic [9:0]  lhs_a;
  logic [6:0]  rhs_a, out_a;
  logic        first;
  data_t       a_elem;
  vec_t        b_row, o_row, o_next;

  always_comb begin
    arow   = {1'b0, ci, cr};
    akcol  = {ck, ckk};
    lhs_a  = 10'(arow) * (10'(bk) * 10'd8) + 10'(akcol);
    rhs_a  = 7'(akcol) * 7'(bj) + 7'(cj);
    out_a  = 7'(arow) * 7'(bj) + 7'(cj);
    first  = (ck == 2'd0) && (ckk == 3'd0);
    a_elem = lhs_mem[lhs_a];
    b_row  = rhs_mem[rhs_a];
    o_row  = out_mem[out_a];
    for (int c = 0; c < ATOM_J; c++)
      o_next[c] = (first ? '0 : o_row[c]) + a_elem * b_row[c];
  end

  assign out0_valid = (state == S_OUT);
  assign out0_data  = out_mem[out_cnt[9:3]][out_cnt[2:0]];

  always_ff @(posedge clk) begin
    if (state == S_RECV && in0_valid && in0_ready && hdr_cnt == 2'd3)
      lhs_mem[lhs_cnt[9:0]] <= in0_data;
    if (in1_valid && in1_ready)
      rhs_mem[rhs_cnt[9:3]][rhs_cnt[2:0]] <= in1_data;
    if (state == S_COMP)
      out_mem[out_a] <= o_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RECV; hdr_cnt <= '0;
      bi <= 5'd1; bk <= 3'd1; bj <= 3'd1;
      lhs_cnt <= '0; rhs_cnt <= '0; out_cnt <= '0;
      ci <= '0; cj <= '0; ck <= '0; cr <= '0; ckk <= '0;
    end else begin
      case (state)
        S_RECV: begin
          if (in0_valid && in0_ready) begin
            case (hdr_cnt)
              2'd0: bi <= 5'(in0_data);
              2'd1: bk <= 3'(in0_data);
              2'd2: bj <= 3'(in0_data);
              default: lhs_cnt <= lhs_cnt + 1'b1;
            endcase
            if (hdr_cnt != 2'd3) hdr_cnt <= hdr_cnt + 1'b1;
          end
          if (in1_valid && in1_ready) rhs_cnt <= rhs_cnt + 1'b1;
          if (lhs_full && rhs_full) begin
            state <= S_COMP;
            ci <= '0; cj <= '0; ck <= '0; cr <= '0; ckk <= '0;
          end
        end
        S_COMP: begin
          // innermost: kk (8), r (2) = one atomic 2x8x8; then k, j, i
          ckk <= ckk + 1'b1;
          if (ckk == 3'd7) begin
            cr <= ~cr;
            if (cr) begin
              ck <= ck + 1'b1;
              if (ck == 2'(bk - 1'b1)) begin
                ck <= '0;
                cj <= cj + 1'b1;
                if (cj == 2'(bj - 1'b1)) begin
                  cj <= '0;
                  ci <= ci + 1'b1;
                  if (ci == 4'(bi - 1'b1)) begin
                    state   <= S_OUT;
                    out_cnt <= '0;
                  end
                end
              end
            end
          end
        end
        S_OUT: if (out0_ready) begin
          out_cnt <= out_cnt + 1'b1;
          if (out_cnt + 1'b1 == out_len) begin
            state   <= S_RECV;
            hdr_cnt <= '0;
            lhs_cnt <= '0;
            rhs_cnt <= '0;
          end
        end
        default: state <= S_RECV;
      endcase
    end
  end

  a_bounds: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_COMP) |-> (32'(bi) >= 1 && 32'(bi) <= BI_MAX && 32'(bk) >= 1 && 32'(bk) <= BK_MAX && 32'(bj) >= 1 && 32'(bj) <= BJ_MAX));
endmodule
