// tb_aie_kernel: checks the flexible-bound MM kernel of one AIE.
//
// For a set of loop bounds from the smallest tile (1,1,1 = 2x8x8) to the
// largest (16,4,4 = 32x32x32), the evaluated sizes 8x24x16 and 14x24x16,
// plus random ones, it streams the bounds and
// random LHS/RHS in (with random gaps on both inputs and random
// back-pressure on the output), and compares OUT with a product computed
// here. It also checks that the compute phase lasts exactly
// 16 * bi * bj * bk cycles (16 cycles per 2x8x8 atomic operation).
module tb_aie_kernel;
  import filco_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in0_valid = 0, in1_valid = 0, out0_ready = 0;
  logic in0_ready, in1_ready, out0_valid, computing;
  data_t in0_data = '0, in1_data = '0, out0_data;

  aie_kernel dut (.*);

  int checks = 0, failures = 0;
  int comp_cycles = 0;
  always_ff @(posedge clk) if (computing) comp_cycles <= comp_cycles + 1;

  data_t lhs [AIE_MAX_I][AIE_MAX_K];
  data_t rhs [AIE_MAX_K][AIE_MAX_J];

  // Handshakes are driven and sampled at the falling edge: a word offered
  // there with ready high is taken at the next rising edge.
  task automatic send0(data_t d);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin in0_valid = 1'b0; @(negedge clk); end
    in0_valid = 1'b1; in0_data = d;
    while (!in0_ready) @(negedge clk);
  endtask

  task automatic send1(data_t d);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin in1_valid = 1'b0; @(negedge clk); end
    in1_valid = 1'b1; in1_data = d;
    while (!in1_ready) @(negedge clk);
  endtask

  task automatic run(int bi, int bk, int bj);
    int ni = 2*bi, nk = 8*bk, nj = 8*bj;
    int errs = 0, got = 0;
    for (int i = 0; i < ni; i++) for (int k = 0; k < nk; k++) lhs[i][k] = data_t'($urandom_range(0, 200)) - 100;
    for (int k = 0; k < nk; k++) for (int j = 0; j < nj; j++) rhs[k][j] = data_t'($urandom_range(0, 200)) - 100;
    comp_cycles = 0;
    fork
      begin
        send0(data_t'(bi)); send0(data_t'(bk)); send0(data_t'(bj));
        for (int i = 0; i < ni; i++) for (int k = 0; k < nk; k++) send0(lhs[i][k]);
        @(negedge clk) in0_valid = 1'b0;
      end
      begin
        // in1 is only taken after the bounds: offer it from the start
        for (int k = 0; k < nk; k++) for (int j = 0; j < nj; j++) send1(rhs[k][j]);
        @(negedge clk) in1_valid = 1'b0;
      end
    join
    while (got < ni * nj) begin
      @(negedge clk);
      out0_ready = ($urandom_range(0, 3) != 0);
      if (out0_valid && out0_ready) begin
        int i = got / nj, j = got % nj;
        data_t s = '0;
        for (int k = 0; k < nk; k++) s += lhs[i][k] * rhs[k][j];
        if (out0_data !== s) errs++;
        got++;
      end
    end
    @(negedge clk) out0_ready = 1'b0;
    checks += 2;
    if (errs != 0) begin
      failures++; $display("bounds (%0d,%0d,%0d): %0d wrong outputs", bi, bk, bj, errs);
    end
    if (comp_cycles != 16 * bi * bj * bk) begin
      failures++; $display("bounds (%0d,%0d,%0d): compute took %0d cycles, expected %0d",
                           bi, bk, bj, comp_cycles, 16 * bi * bj * bk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run(1, 1, 1);
    run(16, 4, 4);
    run(7, 3, 2);    // 14x24x16
    run(1, 4, 1);
    run(4, 3, 2);    // 8x24x16, the smallest single-kernel size evaluated
    for (int t = 0; t < 4; t++) run($urandom_range(1, 16), $urandom_range(1, 4), $urandom_range(1, 4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
