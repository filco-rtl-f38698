// axi_mem_model: behavioural model of the off-chip memory behind an AXI4
// port (testbench only, not synthesizable intent).
//
// A word-addressed array of WORDS 32-bit words answers INCR bursts of
// 32-bit beats: one read burst and one write burst at a time. With
// STALL = 1 it inserts pseudo-random idle cycles on R and W (rvalid low,
// wready low) so that the design's back-pressure paths are exercised.
// Testbenches fill and inspect `mem` directly. Counters report how many
// bursts and stall cycles occurred.
module axi_mem_model #(
  parameter int WORDS = 1 << 18,
  parameter bit STALL = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        arvalid,
  output logic        arready,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic        rlast,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  input  logic        wlast,
  output logic        bvalid,
  input  logic        bready
);
  logic [31:0] mem [WORDS];

  int unsigned n_rbursts, n_wbursts, n_long_bursts, n_stalls, n_wlast_err;

  logic        rd_act, wr_act, wr_resp;
  logic [31:0] rd_addr, wr_addr;
  logic [8:0]  rd_left, wr_left;
  logic        r_gap, w_gap;

  assign arready = !rd_act;
  assign awready = !wr_act && !wr_resp;
  assign rvalid  = rd_act && !r_gap;
  assign rdata   = mem[rd_addr[31:2] % WORDS];
  assign rlast   = (rd_left == 9'd1);
  assign wready  = wr_act && !w_gap;
  assign bvalid  = wr_resp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; wr_act <= 1'b0; wr_resp <= 1'b0;
      rd_addr <= '0; wr_addr <= '0; rd_left <= '0; wr_left <= '0;
      r_gap <= 1'b0; w_gap <= 1'b0;
      n_rbursts <= 0; n_wbursts <= 0; n_long_bursts <= 0; n_stalls <= 0; n_wlast_err <= 0;
    end else begin
      r_gap <= STALL && ($urandom_range(0, 3) == 0);
      w_gap <= STALL && ($urandom_range(0, 3) == 0);
      if (rd_act && r_gap) n_stalls <= n_stalls + 1;
      if (arvalid && arready) begin
        rd_act <= 1'b1; rd_addr <= araddr; rd_left <= 9'(arlen) + 9'd1;
        n_rbursts <= n_rbursts + 1;
        if (arlen == 8'hff) n_long_bursts <= n_long_bursts + 1;
      end else if (rvalid && rready) begin
        rd_addr <= rd_addr + 32'd4;
        rd_left <= rd_left - 1'b1;
        if (rd_left == 9'd1) rd_act <= 1'b0;
      end
      if (awvalid && awready) begin
        wr_act <= 1'b1; wr_addr <= awaddr; wr_left <= 9'(awlen) + 9'd1;
        n_wbursts <= n_wbursts + 1;
      end else if (wvalid && wready) begin
        mem[wr_addr[31:2] % WORDS] <= wdata;
        wr_addr <= wr_addr + 32'd4;
        wr_left <= wr_left - 1'b1;
        if (wlast != (wr_left == 9'd1)) n_wlast_err <= n_wlast_err + 1;
        if (wr_left == 9'd1) begin
          wr_act  <= 1'b0;
          wr_resp <= 1'b1;
        end
      end
      if (wr_resp && bready) wr_resp <= 1'b0;
    end
  end
endmodule
