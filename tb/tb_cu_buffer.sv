// tb_cu_buffer: checks the CU buffer's four ports.
//
// Writes LHS and every RHS bank of both sets through the load port and
// reads them back through the mesh read port; writes OUT banks through the
// mesh write port, then adds to them in accumulate mode, and reads the
// results through the store port. All expected values are kept in
// testbench arrays. Sets and banks must not alias.
module tb_cu_buffer;
  import filco_pkg::*;
  localparam int K = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic ld_we = 0, ld_set = 0, ld_rhs = 0, st_set = 0, mr_set = 0, mw_we = 0, mw_set = 0, mw_acc = 0;
  logic [7:0] ld_bank = '0, st_bank = '0;
  cu_addr_t ld_addr = '0, st_addr = '0, mr_lhs_addr = '0, mr_rhs_addr = '0, mw_addr = '0;
  data_t ld_data = '0, st_data, mr_lhs_data;
  data_t mr_rhs_data [K];
  data_t mw_data [K];

  cu_buffer #(.K_AIE(K)) dut (.*);

  int checks = 0, failures = 0;
  data_t e_lhs [2][64];
  data_t e_rhs [2][K][64];
  data_t e_out [2][K][64];

  initial begin
    foreach (mw_data[a]) mw_data[a] = '0;
    @(posedge clk);
    // load LHS and RHS of both sets, first 64 addresses
    for (int s = 0; s < 2; s++)
      for (int b = -1; b < K; b++)
        for (int x = 0; x < 64; x++) begin
          automatic data_t v = $urandom();
          ld_we <= 1; ld_set <= 1'(s); ld_rhs <= (b >= 0); ld_bank <= 8'(b < 0 ? 0 : b);
          ld_addr <= cu_addr_t'(x); ld_data <= v;
          if (b < 0) e_lhs[s][x] = v; else e_rhs[s][b][x] = v;
          @(posedge clk);
        end
    ld_we <= 0;
    // mesh write then accumulate
    for (int pass = 0; pass < 2; pass++)
      for (int s = 0; s < 2; s++)
        for (int x = 0; x < 64; x++) begin
          mw_we <= 1; mw_set <= 1'(s); mw_acc <= (pass == 1); mw_addr <= cu_addr_t'(x);
          for (int a = 0; a < K; a++) begin
            automatic data_t v = $urandom_range(0, 1000);
            mw_data[a] <= v;
            e_out[s][a][x] = (pass == 1) ? e_out[s][a][x] + v : v;
          end
          @(posedge clk);
        end
    mw_we <= 0;
    @(posedge clk);
    // read back
    for (int s = 0; s < 2; s++)
      for (int x = 0; x < 64; x++) begin
        mr_set = 1'(s); mr_lhs_addr = cu_addr_t'(x); mr_rhs_addr = cu_addr_t'(x);
        #1;
        checks++;
        if (mr_lhs_data !== e_lhs[s][x]) failures++;
        for (int a = 0; a < K; a++) begin
          checks++;
          if (mr_rhs_data[a] !== e_rhs[s][a][x]) failures++;
          st_set = 1'(s); st_bank = 8'(a); st_addr = cu_addr_t'(x);
          #1;
          checks++;
          if (st_data !== e_out[s][a][x]) failures++;
        end
      end
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
