// tb_instr_gen: checks the Instruction Generator's header decoding and
// dispatch.
//
// A random program of packets (random destination, 0..4 words each, the
// last header flagged is_last) is placed in the instruction-memory model,
// which answers with random wait states. Every unit's stream has random
// back-pressure. The testbench checks that each unit receives exactly its
// words in program order, that nothing is sent after the last packet, that
// `done` rises, and that dispatch takes at least 3 cycles per word
// (request, response, hand-off).
module tb_instr_gen;
  import filco_pkg::*;
  localparam int NU = 5;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  logic busy, done, im_req_valid, im_req_ready, im_rsp_valid;
  logic [31:0] im_req_addr;
  iword_t im_rsp_data, out_data;
  logic [NU-1:0] out_valid, out_ready;

  instr_gen #(.N_UNITS(NU)) dut (.clk, .rst_n, .start, .base_addr(32'd16), .busy, .done,
    .im_req_valid, .im_req_ready, .im_req_addr, .im_rsp_valid, .im_rsp_data,
    .out_valid, .out_ready, .out_data);

  instr_mem_model u_im (.clk, .rst_n, .req_valid(im_req_valid), .req_ready(im_req_ready),
    .req_addr(im_req_addr), .rsp_valid(im_rsp_valid), .rsp_data(im_rsp_data));

  int checks = 0, failures = 0;
  iword_t expq [NU][$];
  int n_words = 0, cycles = 0, extra = 0;

  always_ff @(posedge clk) if (busy) cycles <= cycles + 1;

  // receive side: random ready, compare against the expected queue
  always @(negedge clk) begin
    out_ready = NU'($urandom());
    for (int u = 0; u < NU; u++)
      if (out_valid[u] && out_ready[u]) begin
        checks++;
        if (expq[u].size() == 0) begin failures++; extra++; end
        else begin
          automatic iword_t e = expq[u].pop_front();
          if (out_data !== e) begin
            failures++; $display("unit %0d: got %h expected %h", u, out_data, e);
          end
        end
      end
    if ($countones(out_valid) > 1) begin failures++; $display("two units offered at once"); end
  end

  initial begin
    int a = 16;
    for (int p = 0; p < 40; p++) begin
      ig_hdr_t h;
      automatic int n = $urandom_range(0, 4);
      h.is_last = (p == 39);
      h.des_unit = unit_t'($urandom_range(0, NU-1));
      h.valid_length = count_t'(n);
      u_im.mem[a++] = iword_t'(h);
      for (int x = 0; x < n; x++) begin
        automatic iword_t w = {$urandom(), $urandom(), $urandom(), $urandom()};
        u_im.mem[a++] = w;
        expq[h.des_unit].push_back(w);
        n_words++;
      end
    end
    // a word after the final packet must never be sent
    u_im.mem[a] = iword_t'(ig_hdr_t'{is_last: 1'b0, des_unit: 8'd0, valid_length: 16'd1});
    u_im.mem[a+1] = '1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    repeat (50) @(posedge clk);
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (expq[u].size() != 0) begin failures++; $display("unit %0d: %0d words missing", u, expq[u].size()); end
    end
    checks++;
    if (extra != 0) begin failures++; $display("%0d words too many", extra); end
    checks++;
    if (cycles < 3 * n_words) begin failures++; $display("dispatch faster than possible: %0d cycles", cycles); end
    $display("%0d words dispatched in %0d cycles", n_words, cycles);
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
