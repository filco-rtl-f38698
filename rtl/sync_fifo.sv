// sync_fifo: small synchronous FIFO with valid/ready on both sides.
//
// Used as the instruction queue in front of every function unit, so that the
// Instr Generator can run ahead of a unit that is still busy. Storage is a
// register array of DEPTH words (DEPTH a power of two); a word written in
// one cycle can be read in the next. in_ready is low when full, out_valid
// low when empty. Reset empties it. Queue depth is this design's choice.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  assign in_ready  = (wp - rp) != (AW+1)'(DEPTH);
  assign out_valid = wp != rp;
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end
endmodule
