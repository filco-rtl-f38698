// mesh_manager: mesh-in / mesh-out control of one Compute Unit.
//
// On `start` it runs one tile multiplication on CU-buffer set `set` with
// the AIE loop bounds bi, bk, bj. The K AIEs form a 1 x K mesh along the
// output columns: all of them get the same LHS and bank a of RHS, and AIE a
// returns column block a of OUT. The manager therefore
//   - broadcasts {bi, bk, bj} and then LHS (2bi x 8bk words) on every
//     AIE's in0 stream (the kernel reads its loop bounds from in0),
//   - at the same time sends RHS bank a (8bk x 8bj words) on AIE a's in1,
//   - then collects the K out0 streams in lockstep (one word of each per
//     cycle, once all are valid) and writes them to the K OUT banks, either
//     overwriting or, with acc, adding to the partial sums already there.
// `done` pulses for one cycle after the last OUT word is written. A word of
// a broadcast is held until every AIE has taken it (per-AIE taken mask), so
// AIEs that are not in step cannot lose data.
//
// The paper only names the Mesh Manager ("mesh-in and mesh-out logic
// control"); the 1 x K column split, the header-on-in0 framing (from the
// paper's kernel code, which loads its bounds from in0) and the rest of the
// sequencing are this design's choices.
module mesh_manager
  import filco_pkg::*;
#(
  parameter int K_AIE = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             set,
  input  logic [4:0]       bi,
  input  logic [2:0]       bk,
  input  logic [2:0]       bj,
  input  logic             acc,
  output logic             busy,
  output logic             done,
  // CU buffer
  output logic             mr_set,
  output cu_addr_t         mr_lhs_addr,
  input  data_t            mr_lhs_data,
  output cu_addr_t         mr_rhs_addr,
  input  data_t            mr_rhs_data [K_AIE],
  output logic             mw_we,
  output logic             mw_set,
  output logic             mw_acc,
  output cu_addr_t         mw_addr,
  output data_t            mw_data [K_AIE],
  // AIE streams (PLIO)
  output logic [K_AIE-1:0] in0_valid,
  input  logic [K_AIE-1:0] in0_ready,
  output data_t            in0_data,
  output logic [K_AIE-1:0] in1_valid,
  input  logic [K_AIE-1:0] in1_ready,
  output data_t            in1_data [K_AIE],
  input  logic [K_AIE-1:0] out0_valid,
  output logic [K_AIE-1:0] out0_ready,
  input  data_t            out0_data [K_AIE]
);
  logic        r_set, r_acc;
  logic [4:0]  r_bi;
  logic [2:0]  r_bk, r_bj;
  logic [10:0] p0, p1, po;          // words sent on in0 / in1, received on out0
  logic [10:0] n0, n1, no;          // totals
  logic [K_AIE-1:0] taken0, taken1;
  logic        s0_act, s1_act;

  assign n0 = 11'd3 + 11'(r_bi) * 11'(r_bk) * 11'd16;
  assign n1 = 11'(r_bk) * 11'(r_bj) * 11'd64;
  assign no = 11'(r_bi) * 11'(r_bj) * 11'd16;

  assign s0_act = busy && (p0 != n0);
  assign s1_act = busy && (p1 != n1);

  assign mr_set      = r_set;
  assign mr_lhs_addr = cu_addr_t'(p0 - 11'd3);
  assign mr_rhs_addr = cu_addr_t'(p1);

  always_comb begin
    case (p0)
      11'd0:   in0_data = data_t'(r_bi);
      11'd1:   in0_data = data_t'(r_bk);
      11'd2:   in0_data = data_t'(r_bj);
      default: in0_data = mr_lhs_data;
    endcase
    in0_valid = s0_act ? ~taken0 : '0;
    in1_valid = s1_act ? ~taken1 : '0;
    for (int a = 0; a < K_AIE; a++) in1_data[a] = mr_rhs_data[a];
  end

  // mesh-out: all K results of one position are written together
  logic all_out;
  assign all_out    = busy && (&out0_valid);
  assign out0_ready = all_out ? '1 : '0;
  assign mw_we      = all_out;
  assign mw_set     = r_set;
  assign mw_acc     = r_acc;
  assign mw_addr    = cu_addr_t'(po);
  assign mw_data    = out0_data;

  logic [K_AIE-1:0] t0_next, t1_next;
  assign t0_next = taken0 | (in0_valid & in0_ready);
  assign t1_next = taken1 | (in1_valid & in1_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      r_set <= 1'b0; r_acc <= 1'b0; r_bi <= 5'd1; r_bk <= 3'd1; r_bj <= 3'd1;
      p0 <= '0; p1 <= '0; po <= '0; taken0 <= '0; taken1 <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          r_set <= set; r_acc <= acc; r_bi <= bi; r_bk <= bk; r_bj <= bj;
          p0 <= '0; p1 <= '0; po <= '0; taken0 <= '0; taken1 <= '0;
        end
      end else begin
        if (s0_act) begin
          if (&t0_next) begin
            taken0 <= '0;
            p0     <= p0 + 1'b1;
          end else taken0 <= t0_next;
        end
        if (s1_act) begin
          if (&t1_next) begin
            taken1 <= '0;
            p1     <= p1 + 1'b1;
          end else taken1 <= t1_next;
        end
        if (all_out) begin
          po <= po + 1'b1;
          if (po + 1'b1 == no) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // results can only come back after all operands went out
  a_out_after_in: assert property (@(posedge clk) disable iff (!rst_n)
    all_out |-> (p0 == n0 && p1 == n1));
endmodule
