// tb_filco_bert_head: the matrix products of one attention head of
// BERT-32 (32 tokens, head dimension 64, hidden size 768) on the accelerator
// at its default size (9 FMUs, 3 CUs of 8 AIEs, 16384-element FMU buffers),
// one product per CU, all three at once:
//   CU0:  scores  S = Q x K^T   32 x 64 x 32, with K^T padded to 64 columns
//         (a CU tile is 8 x K_AIE = 64 columns wide), bounds (16,4,1)
//   CU1:  context O = P x V     32 x 32 x 64,  bounds (16,4,1)
//   CU2:  the first 64 output columns of the head's share of the output
//         projection, O x Wo     32 x 64 x 64,  bounds (16,4,1), two k steps
// Softmax and scaling between the products are not matrix products and
// are not part of this accelerator; the operands here are test patterns.
// Results in off-chip memory are compared with products computed here, and
// each AIE's compute time must be 16 cycles per 2x8x8 step.
module tb_filco_bert_head;
  import filco_pkg::*;
  import filco_tb_pkg::*;

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
  logic [3*8-1:0] aie_computing;

  filco_top dut (
    .clk, .rst_n, .start, .instr_base(32'd0), .busy, .done,
    .im_req_valid, .im_req_ready, .im_req_addr, .im_rsp_valid, .im_rsp_data,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .aie_computing);

  instr_mem_model u_im (.clk, .rst_n, .req_valid(im_req_valid), .req_ready(im_req_ready),
    .req_addr(im_req_addr), .rsp_valid(im_rsp_valid), .rsp_data(im_rsp_data));

  axi_mem_model #(.WORDS(1 << 20)) u_ddr (.clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  int checks = 0, failures = 0;
  longint cycles = 0;
  int busy_aie [3];
  always_ff @(posedge clk) if (rst_n) begin
    cycles <= cycles + 1;
    for (int c = 0; c < 3; c++) if (aie_computing[c * 8]) busy_aie[c] <= busy_aie[c] + 1;
  end

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
    for (int r = 0; r < dc[j].rows; r++)
      for (int c = 0; c < dc[j].cols; c++)
        if (r < dc[j].r0 || r >= dc[j].r0 + jm[j] || c < dc[j].c0 || c >= dc[j].c0 + jn[j])
          if (u_ddr.mem[int'(dc[j].addr / 4) + r * dc[j].cols + c] != 32'hdead0000) err_out++;
    checks += 2;
    if (err != 0)     begin failures++; $display("job %0d: %0d wrong results", j, err); end
    if (err_out != 0) begin failures++; $display("job %0d: %0d words outside C overwritten", j, err_out); end
  endtask

  initial begin
    prog_builder pb;
    pb = new(9, 3, 8);
    foreach (u_ddr.mem[x]) u_ddr.mem[x] = 32'hdead0000;
    // Q (32x64), K^T padded (64x64), S (32x64)
    da[0] = '{addr: 'h00000, rows: 32, cols: 64, r0: 0, c0: 0};
    db[0] = '{addr: 'h04000, rows: 64, cols: 64, r0: 0, c0: 0};
    dc[0] = '{addr: 'h08000, rows: 32, cols: 64, r0: 0, c0: 0};
    jm[0] = 32; jk[0] = 64; jn[0] = 64;
    // P (32x32), V (32x64), O (32x64)
    da[1] = '{addr: 'h10000, rows: 32, cols: 32, r0: 0, c0: 0};
    db[1] = '{addr: 'h14000, rows: 32, cols: 64, r0: 0, c0: 0};
    dc[1] = '{addr: 'h18000, rows: 32, cols: 64, r0: 0, c0: 0};
    jm[1] = 32; jk[1] = 32; jn[1] = 64;
    // O (32x64), rows 0..63 / columns 0..63 of Wo (768x768), a 32x768 result
    da[2] = '{addr: 'h20000, rows: 32, cols: 64,  r0: 0, c0: 0};
    db[2] = '{addr: 'h40000, rows: 768, cols: 768, r0: 0, c0: 0};
    dc[2] = '{addr: 'h300000, rows: 32, cols: 768, r0: 0, c0: 0};
    jm[2] = 32; jk[2] = 64; jn[2] = 64;
    for (int j = 0; j < 3; j++) begin fill(da[j], 10 + j); fill(db[j], 20 + j); end
    pb.add_job(0, 0, 0, 1, 0, 2, 0, da[0], db[0], dc[0], 32, 64, 64, 16, 4, 1);
    pb.add_job(1, 3, 0, 4, 0, 5, 0, da[1], db[1], dc[1], 32, 32, 64, 16, 4, 1);
    pb.add_job(2, 6, 0, 7, 0, 8, 0, da[2], db[2], dc[2], 32, 64, 64, 16, 4, 1);
    pb.build();
    foreach (pb.prog[x]) u_im.mem[x] = pb.prog[x];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    repeat (2) @(posedge clk);
    $display("done after %0d cycles; AIE compute cycles per CU: %0d %0d %0d",
             cycles, busy_aie[0], busy_aie[1], busy_aie[2]);
    for (int j = 0; j < 3; j++) check_job(j);
    // 16 cycles per 2x8x8 step: 64 steps per tile; CU0 and CU2 two k steps
    checks += 3;
    if (busy_aie[0] != 2 * 64 * 16) begin failures++; $display("CU0 AIE compute cycles %0d", busy_aie[0]); end
    if (busy_aie[1] != 1 * 64 * 16) begin failures++; $display("CU1 AIE compute cycles %0d", busy_aie[1]); end
    if (busy_aie[2] != 2 * 64 * 16) begin failures++; $display("CU2 AIE compute cycles %0d", busy_aie[2]); end
    checks++;
    if (u_ddr.n_wlast_err != 0) begin failures++; $display("wlast misplaced"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: no done after 300000 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
