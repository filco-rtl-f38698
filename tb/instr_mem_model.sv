// instr_mem_model: behavioural model of the off-chip instruction memory
// (testbench only). It accepts a read request when not already serving
// one, sometimes after a pseudo-random wait, and returns the 128-bit word
// two cycles later. Testbenches write the program into `mem` directly.
module instr_mem_model #(
  parameter int WORDS = 4096
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic [31:0]  req_addr,
  output logic         rsp_valid,
  output logic [127:0] rsp_data
);
  logic [127:0] mem [WORDS];
  logic [1:0]   pend;
  logic [31:0]  a;
  logic         gap;

  assign req_ready = (pend == 2'd0) && !gap;
  assign rsp_valid = (pend == 2'd1);
  assign rsp_data  = mem[a % WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; a <= '0; gap <= 1'b0;
    end else begin
      gap <= ($urandom_range(0, 4) == 0);
      if (req_valid && req_ready) begin
        a    <= req_addr;
        pend <= 2'd2;
      end else if (pend != 0) pend <= pend - 1'b1;
    end
  end
endmodule
