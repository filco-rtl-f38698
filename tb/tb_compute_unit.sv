// tb_compute_unit: checks one Compute Unit (2 AIEs, 2 FMU ports) running
// a short ping/pong program with the tile bounds (2,2,1), i.e. a 4 x 16
// LHS, a 16 x 16 RHS (two banks of 8 columns) and a 4 x 16 OUT:
//   1  ping LOAD_LHS A0 (FMU 0)
//   2  ping LOAD_RHS B0 (FMU 1)
//   3  ping COMPUTE              | pong LOAD_LHS A1 (FMU 0)
//   4  pong LOAD_RHS B1 (FMU 1)
//   5  pong COMPUTE              | ping LOAD_LHS A2 (FMU 0)
//   6  ping LOAD_RHS B2 (FMU 1)  | pong STORE to FMU 1
//   7  ping COMPUTE with acc
//   8  ping STORE to FMU 0 (is_last)
// FMU 1 must receive A1 x B1 and FMU 0 must receive A0 x B0 + A2 x B2, both
// row-major, computed here. The FMU streams have random gaps and random
// back-pressure. The test also checks that the two buffer sets were busy
// in the same cycle, that each AIE computed for exactly 3 x 16 x 2 x 2 x 1
// cycles (three tiles of four 2x8x8 steps at 16 cycles each), and that
// `done` rises.
module tb_compute_unit;
  import filco_pkg::*;
  localparam int NF = 2, K = 2;
  localparam int BI = 2, BK = 2, BJ = 1;
  localparam int NI = 2 * BI, NK = 8 * BK, NJ = 8 * BJ * K;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done, idle, instr_valid = 0, instr_ready;
  iword_t instr_data = '0;
  logic [NF-1:0] fmu_in_valid = '0, fmu_in_ready, fmu_out_valid, fmu_out_ready = '0;
  data_t fmu_in_data [NF];
  data_t fmu_out_data;
  logic [K-1:0] aie_computing;

  compute_unit #(.N_FMU(NF), .K_AIE(K)) dut (.clk, .rst_n, .clear(1'b0), .done, .idle,
    .instr_valid, .instr_ready, .instr_data, .fmu_in_valid, .fmu_in_ready, .fmu_in_data,
    .fmu_out_valid, .fmu_out_ready, .fmu_out_data, .aie_computing);

  int checks = 0, failures = 0, extra = 0, overlap = 0, comp = 0;
  always_ff @(posedge clk) begin
    if (dut.active[0] && dut.active[1]) overlap <= overlap + 1;
    if (aie_computing[0]) comp <= comp + 1;
  end

  data_t a [3][NI * NK];
  data_t b [3][NK * NJ];
  data_t q_out [NF][$];

  always @(negedge clk) begin
    fmu_out_ready = NF'($urandom());
    for (int f = 0; f < NF; f++)
      if (fmu_out_valid[f] && fmu_out_ready[f]) begin
        checks++;
        if (q_out[f].size() == 0) begin failures++; extra++; end
        else if (fmu_out_data !== q_out[f].pop_front()) failures++;
      end
  end

  function automatic iword_t enc(bit last, cu_op_e ping, cu_op_e pong, int src, int des, bit acc);
    cu_instr_t i;
    i = '0;
    i.is_last = last; i.ping_op = ping; i.pong_op = pong;
    i.src_fmu = unit_t'(src); i.des_fmu = unit_t'(des);
    i.count = count_t'((ping == CU_LOAD_LHS || pong == CU_LOAD_LHS) ? NI * NK : NK * NJ);
    i.bound_i = 5'(BI); i.bound_k = 3'(BK); i.bound_j = 3'(BJ); i.acc = acc;
    return iword_t'(i);
  endfunction

  task automatic put(int f, data_t d);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin fmu_in_valid[f] = 1'b0; @(negedge clk); end
    fmu_in_valid[f] = 1'b1; fmu_in_data[f] = d;
    #1;
    while (!fmu_in_ready[f]) begin @(negedge clk); #1; end
  endtask

  function automatic void expect_prod(int f, int x, int y);
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < NJ; j++) begin
        data_t s = '0;
        for (int k = 0; k < NK; k++) s += a[x][i * NK + k] * b[x][k * NJ + j];
        if (y >= 0) for (int k = 0; k < NK; k++) s += a[y][i * NK + k] * b[y][k * NJ + j];
        q_out[f].push_back(s);
      end
  endfunction

  iword_t prog [8];

  initial begin
    foreach (fmu_in_data[f]) fmu_in_data[f] = '0;
    for (int t = 0; t < 3; t++) begin
      foreach (a[t][x]) a[t][x] = data_t'($urandom_range(0, 30)) - 15;
      foreach (b[t][x]) b[t][x] = data_t'($urandom_range(0, 30)) - 15;
    end
    expect_prod(1, 1, -1);
    expect_prod(0, 0, 2);
    prog[0] = enc(0, CU_LOAD_LHS, CU_NOP, 0, 0, 0);
    prog[1] = enc(0, CU_LOAD_RHS, CU_NOP, 1, 0, 0);
    prog[2] = enc(0, CU_COMPUTE, CU_LOAD_LHS, 0, 0, 0);
    prog[3] = enc(0, CU_NOP, CU_LOAD_RHS, 1, 0, 0);
    prog[4] = enc(0, CU_LOAD_LHS, CU_COMPUTE, 0, 0, 0);
    prog[5] = enc(0, CU_LOAD_RHS, CU_STORE, 1, 1, 0);
    prog[6] = enc(0, CU_COMPUTE, CU_NOP, 0, 0, 1);
    prog[7] = enc(1, CU_STORE, CU_NOP, 0, 0, 0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int x = 0; x < 8; x++) begin
          @(negedge clk) instr_valid = 1'b1; instr_data = prog[x];
          #1;
          while (!instr_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk) instr_valid = 1'b0;
      end
      begin
        for (int t = 0; t < 3; t++) foreach (a[t][x]) put(0, a[t][x]);
        @(negedge clk) fmu_in_valid[0] = 1'b0;
      end
      begin
        for (int t = 0; t < 3; t++) foreach (b[t][x]) put(1, b[t][x]);
        @(negedge clk) fmu_in_valid[1] = 1'b0;
      end
    join
    wait (done);
    repeat (5) @(posedge clk);
    checks += 5;
    for (int f = 0; f < NF; f++)
      if (q_out[f].size() != 0) begin failures++; $display("FMU %0d: %0d words missing", f, q_out[f].size()); end
    if (extra != 0) begin failures++; $display("%0d words too many", extra); end
    if (overlap == 0) begin failures++; $display("ping and pong never active together"); end
    if (comp != 3 * 16 * BI * BK * BJ) begin
      failures++; $display("AIE computed %0d cycles, expected %0d", comp, 3 * 16 * BI * BK * BJ);
    end
    $display("ping/pong overlap cycles: %0d, AIE compute cycles: %0d", overlap, comp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
