// tb_fmu: checks the Flexible Memory Unit's four operations and its
// ping/pong overlap.
//
// Program (2 CUs, 1024-element buffers):
//   1  ping: receive a 12 x 20 matrix (240 elements) from the IO Manager
//   2  ping: send the view rows 2..5, cols 4..11 (pitch 20) to CU 1
//      pong: receive 100 elements from the IO Manager, at the same time
//   3  pong: send the view rows 0..9, cols 0..9 (pitch 10) to CU 0
//   4  ping: scatter 3 x 4 elements from CU 1 into rows 0..2, cols 1..4
//   5  ping: send all 240 elements back to the IO Manager (is_last)
// Every stream has random gaps or back-pressure. The testbench keeps its
// own copy of both buffers, checks every element leaving the FMU against
// it, checks that both buffers were busy in the same cycle during
// instruction 2, and that `done` rises.
module tb_fmu;
  import filco_pkg::*;
  localparam int NC = 2, DEPTH = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done, idle, instr_valid = 0, instr_ready;
  iword_t instr_data = '0;
  logic iom_in_valid = 0, iom_in_ready, iom_out_valid, iom_out_ready = 0;
  data_t iom_in_data = '0, iom_out_data, cu_out_data;
  logic [NC-1:0] cu_out_valid, cu_out_ready = '0, cu_in_valid = '0, cu_in_ready;
  data_t cu_in_data [NC];

  fmu #(.N_CU(NC), .BUF_DEPTH(DEPTH)) dut (.clk, .rst_n, .clear(1'b0), .done, .idle,
    .instr_valid, .instr_ready, .instr_data,
    .iom_in_valid, .iom_in_ready, .iom_in_data, .iom_out_valid, .iom_out_ready, .iom_out_data,
    .cu_out_valid, .cu_out_ready, .cu_out_data, .cu_in_valid, .cu_in_ready, .cu_in_data);

  int checks = 0, failures = 0, extra = 0, overlap = 0;
  data_t model [2][DEPTH];
  data_t q_iom_out[$], q_cu_out[NC][$];

  always_ff @(posedge clk) if (dut.active[0] && dut.active[1]) overlap <= overlap + 1;

  // receive side: random ready, compare with the expected queues
  always @(negedge clk) begin
    iom_out_ready = ($urandom_range(0, 3) != 0);
    cu_out_ready  = NC'($urandom());
    if (iom_out_valid && iom_out_ready) begin
      checks++;
      if (q_iom_out.size() == 0) begin failures++; extra++; end
      else if (iom_out_data !== q_iom_out.pop_front()) failures++;
    end
    for (int c = 0; c < NC; c++)
      if (cu_out_valid[c] && cu_out_ready[c]) begin
        checks++;
        if (q_cu_out[c].size() == 0) begin failures++; extra++; end
        else if (cu_out_data !== q_cu_out[c].pop_front()) failures++;
      end
  end

  function automatic iword_t enc(bit last, fmu_op_e ping, fmu_op_e pong, int cu, int count,
                                 int sr, int er, int sc, int ec, int ld);
    fmu_instr_t i;
    i = '0;
    i.is_last = last; i.ping_op = ping; i.pong_op = pong;
    i.src_cu = unit_t'(cu); i.des_cu = unit_t'(cu); i.count = count_t'(count);
    i.start_row = dim_t'(sr); i.end_row = dim_t'(er); i.start_col = dim_t'(sc);
    i.end_col = dim_t'(ec); i.ld = dim_t'(ld);
    return iword_t'(i);
  endfunction

  // expected output of a tile-view send, from the model
  task automatic expect_view(int b, int c, int sr, int er, int sc, int ec, int ld);
    for (int r = sr; r < er; r++) for (int x = sc; x < ec; x++) q_cu_out[c].push_back(model[b][r * ld + x]);
  endtask

  task automatic put_iom(data_t d);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin iom_in_valid = 1'b0; @(negedge clk); end
    iom_in_valid = 1'b1; iom_in_data = d;
    #1;
    while (!iom_in_ready) begin @(negedge clk); #1; end
  endtask

  task automatic put_cu(int c, data_t d);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin cu_in_valid[c] = 1'b0; @(negedge clk); end
    cu_in_valid[c] = 1'b1; cu_in_data[c] = d;
    #1;
    while (!cu_in_ready[c]) begin @(negedge clk); #1; end
  endtask

  iword_t prog [5];

  initial begin
    foreach (cu_in_data[c]) cu_in_data[c] = '0;
    for (int x = 0; x < 240; x++) model[0][x] = 32'(1000 + x * 7);
    for (int x = 0; x < 100; x++) model[1][x] = 32'(50000 + x * 5);
    // expected outputs, in program order per stream
    expect_view(0, 1, 2, 6, 4, 12, 20);
    expect_view(1, 0, 0, 10, 0, 10, 10);
    for (int r = 0; r < 3; r++) for (int x = 1; x < 5; x++) model[0][r * 20 + x] = 32'(77000 + r * 10 + x);
    for (int x = 0; x < 240; x++) q_iom_out.push_back(model[0][x]);
    prog[0] = enc(0, FMU_RECV_IOM, FMU_NOP, 0, 240, 0, 0, 0, 0, 0);
    prog[1] = enc(0, FMU_SEND_CU, FMU_RECV_IOM, 1, 100, 2, 6, 4, 12, 20);
    prog[2] = enc(0, FMU_NOP, FMU_SEND_CU, 0, 0, 0, 10, 0, 10, 10);
    prog[3] = enc(0, FMU_RECV_CU, FMU_NOP, 1, 0, 0, 3, 1, 5, 20);
    prog[4] = enc(1, FMU_SEND_IOM, FMU_NOP, 0, 240, 0, 0, 0, 0, 0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int x = 0; x < 5; x++) begin
          @(negedge clk) instr_valid = 1'b1; instr_data = prog[x];
          #1;
          while (!instr_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk) instr_valid = 1'b0;
      end
      begin
        for (int x = 0; x < 240; x++) put_iom(32'(1000 + x * 7));
        for (int x = 0; x < 100; x++) put_iom(32'(50000 + x * 5));
        @(negedge clk) iom_in_valid = 1'b0;
      end
      begin
        for (int r = 0; r < 3; r++) for (int x = 1; x < 5; x++) put_cu(1, 32'(77000 + r * 10 + x));
        @(negedge clk) cu_in_valid[1] = 1'b0;
      end
    join
    wait (done);
    repeat (5) @(posedge clk);
    checks += 4;
    if (q_iom_out.size() != 0) begin failures++; $display("%0d IOM words missing", q_iom_out.size()); end
    if (q_cu_out[0].size() + q_cu_out[1].size() != 0) begin failures++; $display("CU words missing"); end
    if (extra != 0) begin failures++; $display("%0d words too many", extra); end
    if (overlap == 0) begin failures++; $display("ping and pong never active together"); end
    $display("ping/pong overlap cycles: %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
