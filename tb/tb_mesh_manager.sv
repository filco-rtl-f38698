// tb_mesh_manager: checks the Mesh Manager with two real AIE kernels.
//
// The CU buffer is modelled here as plain arrays (LHS, RHS banks, OUT
// banks, two sets) read combinationally and written on the clock edge, as
// the real buffer does. Four tile multiplications run back to back:
//   (bi,bk,bj) = (2,2,1) on set 0, overwrite
//   (2,2,1) on set 0 again with acc: OUT must hold the sum of both products
//   (1,1,2) on set 1, overwrite; set 0 must be left alone
//   (16,4,4) on set 1, the largest tile (32x32 LHS, two 32x32 RHS banks)
// Each OUT bank a must equal LHS x RHS bank a, computed here. The test also
// checks that `done` pulses exactly once per run and that a run is never
// shorter than the AIE compute time (16 cycles per 2x8x8 step) plus one
// cycle per OUT word.
module tb_mesh_manager;
  import filco_pkg::*;
  localparam int K = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, set = 0, acc = 0, busy, done;
  logic [4:0] bi = 5'd1;
  logic [2:0] bk = 3'd1, bj = 3'd1;
  logic mr_set, mw_we, mw_set, mw_acc;
  cu_addr_t mr_lhs_addr, mr_rhs_addr, mw_addr;
  data_t mr_lhs_data, in0_data;
  data_t mr_rhs_data [K], mw_data [K], in1_data [K], out0_data [K];
  logic [K-1:0] in0_valid, in0_ready, in1_valid, in1_ready, out0_valid, out0_ready, computing;

  mesh_manager #(.K_AIE(K)) dut (.*);

  for (genvar a = 0; a < K; a++) begin : g_aie
    aie_kernel u_aie (.clk, .rst_n,
      .in0_valid(in0_valid[a]), .in0_ready(in0_ready[a]), .in0_data(in0_data),
      .in1_valid(in1_valid[a]), .in1_ready(in1_ready[a]), .in1_data(in1_data[a]),
      .out0_valid(out0_valid[a]), .out0_ready(out0_ready[a]), .out0_data(out0_data[a]),
      .computing(computing[a]));
  end

  // CU buffer model
  data_t lhs [2][CU_TILE];
  data_t rhs [2][K][CU_TILE];
  data_t out [2][K][CU_TILE];
  assign mr_lhs_data = lhs[mr_set][mr_lhs_addr];
  for (genvar a = 0; a < K; a++) begin : g_rd
    assign mr_rhs_data[a] = rhs[mr_set][a][mr_rhs_addr];
  end
  always @(posedge clk)
    if (mw_we)
      for (int a = 0; a < K; a++)
        out[mw_set][a][mw_addr] <= mw_acc ? out[mw_set][a][mw_addr] + mw_data[a] : mw_data[a];

  int checks = 0, failures = 0, n_done = 0, busy_cycles = 0;
  always_ff @(posedge clk) begin
    if (done) n_done <= n_done + 1;
    if (busy) busy_cycles <= busy_cycles + 1;
  end

  data_t e_out [2][K][CU_TILE];

  task automatic run(int s, int i_b, int k_b, int j_b, bit a_cc);
    int ni = 2 * i_b, nk = 8 * k_b, nj = 8 * j_b;
    int errs = 0, d0 = n_done, c0 = busy_cycles;
    data_t other [K][CU_TILE];
    other = e_out[1 - s];
    for (int x = 0; x < ni * nk; x++) lhs[s][x] = data_t'($urandom_range(0, 40)) - 20;
    for (int a = 0; a < K; a++)
      for (int x = 0; x < nk * nj; x++) rhs[s][a][x] = data_t'($urandom_range(0, 40)) - 20;
    for (int a = 0; a < K; a++)
      for (int i = 0; i < ni; i++)
        for (int j = 0; j < nj; j++) begin
          data_t p = '0;
          for (int k = 0; k < nk; k++) p += lhs[s][i * nk + k] * rhs[s][a][k * nj + j];
          e_out[s][a][i * nj + j] = a_cc ? e_out[s][a][i * nj + j] + p : p;
        end
    @(negedge clk);
    start = 1'b1; set = 1'(s); acc = a_cc; bi = 5'(i_b); bk = 3'(k_b); bj = 3'(j_b);
    @(negedge clk) start = 1'b0;
    wait (n_done == d0 + 1);
    repeat (3) @(negedge clk);
    for (int a = 0; a < K; a++)
      for (int x = 0; x < ni * nj; x++) if (out[s][a][x] !== e_out[s][a][x]) errs++;
    for (int a = 0; a < K; a++)
      for (int x = 0; x < CU_TILE; x++) if (out[1 - s][a][x] !== other[a][x]) errs++;
    checks += 3;
    if (errs != 0) begin failures++; $display("(%0d,%0d,%0d) set %0d: %0d wrong words", i_b, k_b, j_b, s, errs); end
    if (n_done != d0 + 1) begin failures++; $display("done pulsed %0d times", n_done - d0); end
    if (busy_cycles - c0 < 16 * i_b * k_b * j_b + ni * nj) begin
      failures++; $display("run too short: %0d cycles", busy_cycles - c0);
    end
    $display("(%0d,%0d,%0d): %0d cycles", i_b, k_b, j_b, busy_cycles - c0);
  endtask

  initial begin
    for (int s = 0; s < 2; s++) for (int a = 0; a < K; a++)
      for (int x = 0; x < CU_TILE; x++) begin out[s][a][x] = '0; e_out[s][a][x] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0, 2, 2, 1, 0);
    run(0, 2, 2, 1, 1);
    run(1, 1, 1, 2, 0);
    run(1, 16, 4, 4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
