// fmu: Flexible Memory Unit.
//
// An FMU is a 1-D addressed double buffer (buffer 0 = "ping", buffer 1 =
// "pong", BUF_DEPTH elements each) with its own instruction decoder. Each
// instruction names one operation for each buffer; the two run at the same
// time (typically one buffer fills from off-chip while the other feeds a
// CU) and the instruction retires when both have finished. Because the
// buffer is flat, the same storage can hold a 256x256 operand, a 128x512
// one, weights, activations or results: the shape is only the view an
// instruction puts on it. Operations (filco_pkg::fmu_op_e):
//   FMU_RECV_IOM  write `count` elements from the IO Manager to addresses 0..count-1
//   FMU_SEND_IOM  read addresses 0..count-1 out to the IO Manager
//   FMU_SEND_CU   gather the tile rows [start_row,end_row) x cols
//                 [start_col,end_col), address row*ld+col, row-major, to CU des_cu
//   FMU_RECV_CU   scatter elements from CU src_cu into that same tile view
// Every stream moves one element per cycle when both sides are ready.
// After an instruction with is_last the FMU raises `done` until `clear`.
//
// The paper gives the double buffer, the 1-D addressing, counting receives,
// tile-view sends, the src/des unit fields and operands-or-results use.
// Own choices: the `ld` row-pitch field (the paper's field list has no row
// pitch), scattering CU results through the tile view, one element per
// cycle (the paper widens off-chip ports with cyclic partitioning), the
// opcode set and that the two operations of one instruction must use
// different streams (asserted).
module fmu
  import filco_pkg::*;
#(
  parameter int N_CU      = 3,
  parameter int BUF_DEPTH = 16384,
  parameter int IQ_DEPTH  = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  output logic            done,
  output logic            idle,
  // instruction stream
  input  logic            instr_valid,
  output logic            instr_ready,
  input  iword_t          instr_data,
  // from IO Manager loader
  input  logic            iom_in_valid,
  output logic            iom_in_ready,
  input  data_t           iom_in_data,
  // to IO Manager storer
  output logic            iom_out_valid,
  input  logic            iom_out_ready,
  output data_t           iom_out_data,
  // to CUs (one pre-routed stream per CU, data shared)
  output logic [N_CU-1:0] cu_out_valid,
  input  logic [N_CU-1:0] cu_out_ready,
  output data_t           cu_out_data,
  // from CUs
  input  logic [N_CU-1:0] cu_in_valid,
  output logic [N_CU-1:0] cu_in_ready,
  input  data_t           cu_in_data [N_CU]
);
  localparam int AW = $clog2(BUF_DEPTH);

  data_t mem [2][BUF_DEPTH];

  logic       q_valid, q_ready;
  iword_t     q_data;
  fmu_instr_t qi, ins;
  logic       busy;

  fmu_op_e     op     [2];
  logic        active [2];
  count_t      idx    [2];   // running index for count operations
  dim_t        row    [2];
  dim_t        col    [2];
  logic [23:0] rbase  [2];   // row * ld of the current tile row

  logic        fire   [2];   // this engine moves one element this cycle
  logic [AW-1:0] addr [2];

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_q (
    .clk, .rst_n, .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data));

  assign qi      = fmu_instr_t'(q_data[$bits(fmu_instr_t)-1:0]);
  assign q_ready = !busy;
  assign idle    = !busy && !q_valid;

  function automatic logic op_uses_tile(fmu_op_e o);
    return (o == FMU_SEND_CU) || (o == FMU_RECV_CU);
  endfunction

  function automatic logic op_empty(fmu_op_e o, fmu_instr_t i);
    if (o == FMU_NOP) return 1'b1;
    if (op_uses_tile(o)) return (i.start_row >= i.end_row) || (i.start_col >= i.end_col);
    return i.count == 0;
  endfunction

  // ---------------------------------------------------------------- ports
  always_comb begin
    iom_in_ready  = 1'b0;
    iom_out_valid = 1'b0;
    iom_out_data  = '0;
    cu_out_valid  = '0;
    cu_out_data   = '0;
    cu_in_ready   = '0;
    for (int b = 0; b < 2; b++) begin
      addr[b] = op_uses_tile(op[b]) ? AW'(rbase[b] + 24'(col[b])) : AW'(idx[b]);
      fire[b] = 1'b0;
      if (active[b]) begin
        case (op[b])
          FMU_RECV_IOM: begin
            iom_in_ready = 1'b1;
            fire[b]      = iom_in_valid;
          end
          FMU_SEND_IOM: begin
            iom_out_valid = 1'b1;
            iom_out_data  = mem[b][addr[b]];
            fire[b]       = iom_out_ready;
          end
          FMU_SEND_CU: begin
            cu_out_valid[ins.des_cu] = 1'b1;
            cu_out_data              = mem[b][addr[b]];
            fire[b]                  = cu_out_ready[ins.des_cu];
          end
          FMU_RECV_CU: begin
            cu_in_ready[ins.src_cu] = 1'b1;
            fire[b]                 = cu_in_valid[ins.src_cu];
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- storage
  always_ff @(posedge clk) begin
    for (int b = 0; b < 2; b++) begin
      if (fire[b] && op[b] == FMU_RECV_IOM) mem[b][addr[b]] <= iom_in_data;
      if (fire[b] && op[b] == FMU_RECV_CU)  mem[b][addr[b]] <= cu_in_data[ins.src_cu];
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ins  <= '0;
      for (int b = 0; b < 2; b++) begin
        op[b] <= FMU_NOP; active[b] <= 1'b0; idx[b] <= '0;
        row[b] <= '0; col[b] <= '0; rbase[b] <= '0;
      end
    end else begin
      if (clear) done <= 1'b0;
      if (!busy) begin
        if (q_valid) begin
          ins  <= qi;
          busy <= 1'b1;
          op[0] <= qi.ping_op;
          op[1] <= qi.pong_op;
          active[0] <= !op_empty(qi.ping_op, qi);
          active[1] <= !op_empty(qi.pong_op, qi);
          for (int b = 0; b < 2; b++) begin
            idx[b]   <= '0;
            row[b]   <= qi.start_row;
            col[b]   <= qi.start_col;
            rbase[b] <= 24'(qi.start_row) * 24'(qi.ld);
          end
        end
      end else begin
        for (int b = 0; b < 2; b++) begin
          if (fire[b]) begin
            if (op_uses_tile(op[b])) begin
              if (col[b] + 1'b1 == ins.end_col) begin
                col[b]   <= ins.start_col;
                row[b]   <= row[b] + 1'b1;
                rbase[b] <= rbase[b] + 24'(ins.ld);
                if (row[b] + 1'b1 == ins.end_row) active[b] <= 1'b0;
              end else col[b] <= col[b] + 1'b1;
            end else begin
              idx[b] <= idx[b] + 1'b1;
              if (idx[b] + 1'b1 == ins.count) active[b] <= 1'b0;
            end
          end
        end
        if (!active[0] && !active[1]) begin
          busy <= 1'b0;
          if (ins.is_last) done <= 1'b1;
        end
      end
    end
  end

  // The two operations of one instruction must not share a stream.
  a_no_port_clash: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && q_valid && qi.ping_op != FMU_NOP) |-> (qi.ping_op != qi.pong_op));
  a_tile_in_buffer: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && q_valid && (op_uses_tile(qi.ping_op) || op_uses_tile(qi.pong_op)) && qi.end_row != 0)
      |-> (32'(qi.end_row - 1'b1) * 32'(qi.ld) + 32'(qi.end_col) <= BUF_DEPTH));
  a_count_in_buffer: assert property (@(posedge clk) disable iff (!rst_n)
    (!busy && q_valid) |-> (32'(qi.count) <= BUF_DEPTH));
endmodule
