// tb_filco_top: end-to-end test of the FILCO accelerator at reduced size
// (6 FMUs, 2 CUs of 2 AIEs, 4096-element FMU buffers).
//
// Three matrix multiplications run from one instruction program:
//   job 1 on CU0:  8x64 * 64x32, bounds (4,4,1): two k steps accumulate,
//                  two output tiles alternate the CU buffer sets; A and C
//                  are sub-matrices of larger off-chip matrices
//   job 2 on CU1:  4x8 * 8x32,  bounds (1,1,2), concurrently with job 1;
//                  its B rows cross a 4 KiB boundary (burst split)
//   job 3 on CU0:  4x16 * 16x16, bounds (2,2,1), after job 1, in the pong
//                  buffers of job 1's FMUs (loads overlap job 1's sends)
// Results in off-chip memory are compared with a reference product
// computed here, and the words next to each result tile are checked to
// be untouched. Each mechanism of the design is counted and must occur:
// CU ping/pong overlap, FMU ping/pong overlap, accumulation, three
// different tile shapes, split AXI bursts, memory stalls, stream
// back-pressure, multi-word instruction packets.
module tb_filco_top;
  import filco_pkg::*;
  import filco_tb_pkg::*;

  localparam int N_FMU = 6, N_CU = 2, K_AIE = 2, FMU_DEPTH = 4096;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  logic busy, done;
  logic im_req_valid, im_req_ready, im_rsp_valid;
  logic [31:0] im_req_addr;
  iword_t im_rsp_data;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  data_t rdata, wdata;
  logic [N_CU*K_AIE-1:0] aie_computing;

  filco_top #(.N_FMU(N_FMU), .N_CU(N_CU), .K_AIE(K_AIE), .FMU_DEPTH(FMU_DEPTH)) dut (
    .clk, .rst_n, .start, .instr_base(32'd0), .busy, .done,
    .im_req_valid, .im_req_ready, .im_req_addr, .im_rsp_valid, .im_rsp_data,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .aie_computing);

  instr_mem_model u_im (.clk, .rst_n, .req_valid(im_req_valid), .req_ready(im_req_ready),
    .req_addr(im_req_addr), .rsp_valid(im_rsp_valid), .rsp_data(im_rsp_data));

  axi_mem_model #(.WORDS(1 << 16)) u_ddr (.clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  int checks = 0, failures = 0;
  longint cycles = 0;

  // ---------------------------------------------------------------- mechanisms
  int n_cu_pingpong = 0, n_fmu_pingpong = 0, n_acc = 0, n_stream_stall = 0, n_multi_pkt = 0;
  int n_shape [3];
  always_ff @(posedge clk) if (rst_n) begin
    cycles <= cycles + 1;
    if (dut.g_cu[0].u_cu.active[0] && dut.g_cu[0].u_cu.active[1]) n_cu_pingpong <= n_cu_pingpong + 1;
    if (dut.g_fmu[0].u_fmu.active[0] && dut.g_fmu[0].u_fmu.active[1]) n_fmu_pingpong <= n_fmu_pingpong + 1;
    if (dut.g_cu[0].u_cu.mw_we && dut.g_cu[0].u_cu.mw_acc) n_acc <= n_acc + 1;
    if (dut.f2c_v[0][0] && !dut.f2c_r[0][0]) n_stream_stall <= n_stream_stall + 1;
    if (int'(dut.u_ig.state) == 2 /* S_WAIT_HDR */ && im_rsp_valid && im_rsp_data[15:0] > 1) n_multi_pkt <= n_multi_pkt + 1;
    for (int c = 0; c < N_CU; c++)
      if (c == 0 ? dut.g_cu[0].u_cu.mm_start : dut.g_cu[1].u_cu.mm_start) begin
        automatic int bi = (c == 0) ? int'(dut.g_cu[0].u_cu.ins.bound_i) : int'(dut.g_cu[1].u_cu.ins.bound_i);
        if (bi == 4) n_shape[0] <= n_shape[0] + 1;
        if (bi == 1) n_shape[1] <= n_shape[1] + 1;
        if (bi == 2) n_shape[2] <= n_shape[2] + 1;
      end
  end

  // ---------------------------------------------------------------- data
  dmat_t da[3], db[3], dc[3];
  int jm[3], jk[3], jn[3];

  task automatic fill(dmat_t d, int id);
    for (int r = 0; r < d.rows; r++)
      for (int c = 0; c < d.cols; c++)
        u_ddr.mem[int'(d.addr / 4) + r * d.cols + c] = 32'(tval(id, r, c));
  endtask

  task automatic check_job(int j);
    int err = 0, err_out = 0;
    for (int r = 0; r < jm[j]; r++)
      for (int c = 0; c < jn[j]; c++) begin
        int s = 0;
        for (int k = 0; k < jk[j]; k++)
          s += tval(10 + j, da[j].r0 + r, da[j].c0 + k) * tval(20 + j, db[j].r0 + k, db[j].c0 + c);
        if (u_ddr.mem[int'(dc[j].addr / 4) + (dc[j].r0 + r) * dc[j].cols + dc[j].c0 + c] != 32'(s)) err++;
      end
    // words around the result tile keep their initial value
    for (int r = 0; r < dc[j].rows; r++)
      for (int c = 0; c < dc[j].cols; c++)
        if (r < dc[j].r0 || r >= dc[j].r0 + jm[j] || c < dc[j].c0 || c >= dc[j].c0 + jn[j])
          if (u_ddr.mem[int'(dc[j].addr / 4) + r * dc[j].cols + c] != 32'hdead0000) err_out++;
    checks += 2;
    if (err != 0)     begin failures++; $display("job %0d: %0d wrong results", j, err); end
    if (err_out != 0) begin failures++; $display("job %0d: %0d words outside C overwritten", j, err_out); end
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    prog_builder pb;
    pb = new(N_FMU, N_CU, K_AIE);
    foreach (u_ddr.mem[x]) u_ddr.mem[x] = 32'hdead0000;
    // job 1
    da[0] = '{addr: 'h0000, rows: 16, cols: 80, r0: 4, c0: 8};
    db[0] = '{addr: 'h8000, rows: 64, cols: 32, r0: 0, c0: 0};
    dc[0] = '{addr: 'h10000, rows: 16, cols: 40, r0: 2, c0: 4};
    jm[0] = 8; jk[0] = 64; jn[0] = 32;
    // job 2: B has 1100 columns, the tile starts at column 1010
    da[1] = '{addr: 'h14000, rows: 4, cols: 8, r0: 0, c0: 0};
    db[1] = '{addr: 'h18000, rows: 8, cols: 1100, r0: 0, c0: 1010};
    dc[1] = '{addr: 'h24000, rows: 4, cols: 32, r0: 0, c0: 0};
    jm[1] = 4; jk[1] = 8; jn[1] = 32;
    // job 3
    da[2] = '{addr: 'h28000, rows: 4, cols: 16, r0: 0, c0: 0};
    db[2] = '{addr: 'h2c000, rows: 16, cols: 16, r0: 0, c0: 0};
    dc[2] = '{addr: 'h30000, rows: 6, cols: 20, r0: 1, c0: 2};
    jm[2] = 4; jk[2] = 16; jn[2] = 16;
    for (int j = 0; j < 3; j++) begin fill(da[j], 10 + j); fill(db[j], 20 + j); end
    pb.add_job(0, 0, 0, 1, 0, 2, 0, da[0], db[0], dc[0], 8, 64, 32, 4, 4, 1);
    pb.add_job(1, 3, 0, 4, 0, 5, 0, da[1], db[1], dc[1], 4, 8, 32, 1, 1, 2);
    pb.add_job(0, 0, 1, 1, 1, 2, 1, da[2], db[2], dc[2], 4, 16, 16, 2, 2, 1);
    pb.build();
    foreach (pb.prog[x]) u_im.mem[x] = pb.prog[x];
    $display("program: %0d words, %0d FMU and %0d CU ping/pong merges",
             pb.prog.size(), pb.n_merged_fmu, pb.n_merged_cu);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    repeat (2) @(posedge clk);
    $display("done after %0d cycles", cycles);
    for (int j = 0; j < 3; j++) check_job(j);
    checks++;
    if (u_ddr.n_wlast_err != 0) begin failures++; $display("wlast misplaced %0d times", u_ddr.n_wlast_err); end
    checks++;
    if (busy) begin failures++; $display("units still busy after done"); end
    $display("mechanisms:");
    expect_seen("CU ping/pong overlap cycles", n_cu_pingpong);
    expect_seen("FMU ping/pong overlap cycles", n_fmu_pingpong);
    expect_seen("accumulating OUT writes", n_acc);
    expect_seen("tiles with bounds (4,4,1)", n_shape[0]);
    expect_seen("tiles with bounds (1,1,2)", n_shape[1]);
    expect_seen("tiles with bounds (2,2,1)", n_shape[2]);
    // 104 tile rows are read; every burst beyond that is a split at 4 KiB
    expect_seen("split read bursts", int'(u_ddr.n_rbursts) - 104);
    expect_seen("memory stall cycles", int'(u_ddr.n_stalls));
    expect_seen("FMU->CU back-pressure cycles", n_stream_stall);
    expect_seen("multi-word instruction packets", n_multi_pkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: no done after 200000 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
