// tb_io_manager: checks the IO Manager's Loader and Storer.
//
// The Loader gets three instructions: a 3 x 600 tile of a 4 x 700 matrix
// (rows longer than one burst and crossing 4 KiB boundaries) for FMU 1, a
// 4 x 8 tile for FMU 2, and an empty tile with is_last for FMU 0. The
// Storer gets one instruction with is_last: a 4 x 10 tile from FMU 0 into
// the middle of a 6 x 20 matrix. The memory model stalls at random and each
// FMU stream has random back-pressure. The testbench checks every element
// delivered to each FMU, every element written back, that the words around
// the stored tile are untouched, that each burst ends with wlast where it
// should, that the number of read and write bursts equals the number
// worked out here from the 256-beat and 4 KiB rules, and that ld_done and
// st_done rise.
module tb_io_manager;
  import filco_pkg::*;
  import filco_tb_pkg::*;
  localparam int NF = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_done, st_done, ld_idle, st_idle;
  logic ld_instr_valid = 0, st_instr_valid = 0, ld_instr_ready, st_instr_ready;
  iword_t ld_instr_data = '0, st_instr_data = '0;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  data_t rdata, wdata;
  logic [NF-1:0] fmu_in_valid, fmu_in_ready, fmu_out_valid = '0, fmu_out_ready;
  data_t fmu_in_data;
  data_t fmu_out_data [NF];

  io_manager #(.N_FMU(NF)) dut (.clk, .rst_n, .clear(1'b0), .ld_done, .st_done, .ld_idle, .st_idle,
    .ld_instr_valid, .ld_instr_ready, .ld_instr_data, .st_instr_valid, .st_instr_ready, .st_instr_data,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .fmu_in_valid, .fmu_in_ready, .fmu_in_data, .fmu_out_valid, .fmu_out_ready, .fmu_out_data);

  axi_mem_model #(.WORDS(1 << 16)) u_ddr (.clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  int checks = 0, failures = 0;
  data_t expq [NF][$];
  int n_got = 0, extra = 0;

  // FMU receive side
  always @(negedge clk) begin
    fmu_in_ready = NF'($urandom());
    for (int f = 0; f < NF; f++)
      if (fmu_in_valid[f] && fmu_in_ready[f]) begin
        checks++; n_got++;
        if (expq[f].size() == 0) begin failures++; extra++; end
        else begin
          automatic data_t e = expq[f].pop_front();
          if (fmu_in_data !== e) failures++;
        end
      end
  end

  // number of bursts for a tile, from the 256-beat and 4 KiB rules
  function automatic int n_bursts(dmat_t d, int nr, int nc);
    int n = 0;
    for (int r = 0; r < nr; r++) begin
      int beats = 0;
      for (int c = 0; c < nc; c++) begin
        longint a = d.addr + 4 * ((d.r0 + r) * d.cols + d.c0 + c);
        if (c == 0 || beats == 256 || a % 4096 == 0) begin n++; beats = 0; end
        beats++;
      end
    end
    return n;
  endfunction

  task automatic send_ld(iword_t w);
    @(negedge clk);
    ld_instr_valid = 1'b1; ld_instr_data = w;
    #1;
    while (!ld_instr_ready) begin @(negedge clk); #1; end
    @(negedge clk) ld_instr_valid = 1'b0;
  endtask

  task automatic send_st(iword_t w);
    @(negedge clk);
    st_instr_valid = 1'b1; st_instr_data = w;
    #1;
    while (!st_instr_ready) begin @(negedge clk); #1; end
    @(negedge clk) st_instr_valid = 1'b0;
  endtask

  dmat_t l1, l2, l0, s1;
  int exp_rb, exp_wb;

  initial begin
    foreach (fmu_out_data[f]) fmu_out_data[f] = '0;
    foreach (u_ddr.mem[x]) u_ddr.mem[x] = 32'(x * 3 + 1);
    l1 = '{addr: 'h1000, rows: 4, cols: 700, r0: 1, c0: 50};
    l2 = '{addr: 'h20000, rows: 8, cols: 8, r0: 2, c0: 0};
    l0 = '{addr: 'h0, rows: 1, cols: 1, r0: 0, c0: 0};
    s1 = '{addr: 'h30000, rows: 6, cols: 20, r0: 1, c0: 3};
    for (int r = 0; r < 3; r++) for (int c = 0; c < 600; c++)
      expq[1].push_back(u_ddr.mem[int'(l1.addr / 4) + (l1.r0 + r) * l1.cols + l1.c0 + c]);
    for (int r = 0; r < 4; r++) for (int c = 0; c < 8; c++)
      expq[2].push_back(u_ddr.mem[int'(l2.addr / 4) + (l2.r0 + r) * l2.cols + l2.c0 + c]);
    exp_rb = n_bursts(l1, 3, 600) + n_bursts(l2, 4, 8);
    exp_wb = n_bursts(s1, 4, 10);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        send_ld(enc_iom(0, l1, 1, 3, 600));
        send_ld(enc_iom(0, l2, 2, 4, 8));
        send_ld(enc_iom(1, l0, 0, 0, 0));
      end
      send_st(enc_iom(1, s1, 0, 4, 10));
      // FMU 0 offers the tile to be stored, row-major
      for (int x = 0; x < 40; x++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) begin fmu_out_valid[0] = 1'b0; @(negedge clk); end
        fmu_out_valid[0] = 1'b1; fmu_out_data[0] = 32'h5000 + x;
        #1;
        while (!fmu_out_ready[0]) begin @(negedge clk); #1; end
        if (x == 39) @(negedge clk) fmu_out_valid[0] = 1'b0;
      end
    join
    wait (ld_done && st_done);
    repeat (5) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      checks++;
      if (expq[f].size() != 0) begin failures++; $display("FMU %0d: %0d elements missing", f, expq[f].size()); end
    end
    checks++;
    if (extra != 0) begin failures++; $display("%0d elements too many", extra); end
    for (int r = 0; r < s1.rows; r++)
      for (int c = 0; c < s1.cols; c++) begin
        int a = int'(s1.addr / 4) + r * s1.cols + c;
        bit inside_t = r >= 1 && r < 5 && c >= 3 && c < 13;
        checks++;
        if (inside_t && u_ddr.mem[a] !== 32'(32'h5000 + (r - 1) * 10 + (c - 3))) failures++;
        if (!inside_t && u_ddr.mem[a] !== 32'(a * 3 + 1)) failures++;
      end
    checks += 3;
    if (u_ddr.n_wlast_err != 0) begin failures++; $display("wlast misplaced %0d times", u_ddr.n_wlast_err); end
    if (int'(u_ddr.n_rbursts) != exp_rb) begin failures++; $display("read bursts %0d, expected %0d", u_ddr.n_rbursts, exp_rb); end
    if (int'(u_ddr.n_wbursts) != exp_wb) begin failures++; $display("write bursts %0d, expected %0d", u_ddr.n_wbursts, exp_wb); end
    $display("%0d elements loaded in %0d read bursts (%0d of 256 beats), %0d write bursts",
             n_got, u_ddr.n_rbursts, u_ddr.n_long_bursts, u_ddr.n_wbursts);
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
