// io_manager: IO Manager, the FILCO unit between off-chip memory and FMUs.
//
// It holds two independent engines with their own instruction queues, as
// in the paper's instruction table: the Loader copies the tile
// [start_row,end_row) x [start_col,end_col) of an M x N row-major matrix at
// byte address ddr_addr into FMU des_fmu, the Storer copies a tile coming
// from FMU src_fmu back to the same kind of place. Each tile row is cut into
// AXI4 INCR bursts (one 32-bit element per beat) of at most 256 beats that
// never cross a 4 KiB boundary, so long rows give long bursts. The Loader
// uses the read channels (AR/R), the Storer the write channels (AW/W/B);
// both keep one burst outstanding. Elements are streamed in row-major tile
// order, which is the order the FMU stores them in (FMU_RECV_IOM).
//
// An instruction with an empty tile does nothing, which makes it the way to
// deliver a bare is_last. After executing an instruction with is_last the
// engine raises ld_done / st_done until `clear`.
//
// From the paper: the loader/storer split, the instruction fields, the use
// of long AXI bursts. Own choices: one element per beat (the paper uses wide
// ports with cyclic partitioning), the burst cutting rule, one outstanding
// burst, the queue depth.
module io_manager
  import filco_pkg::*;
#(
  parameter int N_FMU      = 9,
  parameter int IQ_DEPTH   = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  output logic             ld_done,
  output logic             st_done,
  output logic             ld_idle,
  output logic             st_idle,
  // instruction streams
  input  logic             ld_instr_valid,
  output logic             ld_instr_ready,
  input  iword_t           ld_instr_data,
  input  logic             st_instr_valid,
  output logic             st_instr_ready,
  input  iword_t           st_instr_data,
  // AXI4 read address / data
  output logic             arvalid,
  input  logic             arready,
  output logic [31:0]      araddr,
  output logic [7:0]       arlen,
  input  logic             rvalid,
  output logic             rready,
  input  data_t            rdata,
  input  logic             rlast,
  // AXI4 write address / data / response
  output logic             awvalid,
  input  logic             awready,
  output logic [31:0]      awaddr,
  output logic [7:0]       awlen,
  output logic             wvalid,
  input  logic             wready,
  output data_t            wdata,
  output logic             wlast,
  input  logic             bvalid,
  output logic             bready,
  // streams to the FMUs (loader side), data shared
  output logic [N_FMU-1:0] fmu_in_valid,
  input  logic [N_FMU-1:0] fmu_in_ready,
  output data_t            fmu_in_data,
  // streams from the FMUs (storer side)
  input  logic [N_FMU-1:0] fmu_out_valid,
  output logic [N_FMU-1:0] fmu_out_ready,
  input  data_t            fmu_out_data [N_FMU]
);
  typedef enum logic [1:0] {E_IDLE, E_ADDR, E_DATA, E_RESP} eng_e;

  // Start address and length of the next burst of a tile row.
  function automatic logic [31:0] elem_addr(iom_instr_t ins, dim_t row, dim_t col);
    logic [23:0] idx;
    idx = 24'(row) * 24'(ins.n) + 24'(col);
    return ins.ddr_addr + {6'd0, idx, 2'b00};
  endfunction

  function automatic logic [8:0] burst_beats(logic [31:0] a, dim_t col, dim_t end_col);
    logic [12:0] to_end, to_4k, b;
    to_end = 13'(end_col) - 13'(col);
    to_4k  = (13'd4096 - 13'(a[11:0])) >> 2;
    b = to_end;
    if (to_4k < b)  b = to_4k;
    if (b > 13'd256) b = 13'd256;
    return b[8:0];
  endfunction

  function automatic logic tile_empty(iom_instr_t ins);
    return (ins.start_row >= ins.end_row) || (ins.start_col >= ins.end_col);
  endfunction

  // ------------------------------------------------------------ Loader
  logic       lq_valid, lq_ready;
  iword_t     lq_data;
  eng_e       ls;
  iom_instr_t li;
  dim_t       lrow, lcol;
  logic [8:0] lbeats;
  logic [31:0] l_addr;
  logic [8:0]  l_len;

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_lq (
    .clk, .rst_n, .in_valid(ld_instr_valid), .in_ready(ld_instr_ready), .in_data(ld_instr_data),
    .out_valid(lq_valid), .out_ready(lq_ready), .out_data(lq_data));

  iom_instr_t lq_i;
  assign lq_i     = iom_instr_t'(lq_data[$bits(iom_instr_t)-1:0]);
  assign lq_ready = (ls == E_IDLE);
  assign l_addr   = elem_addr(li, lrow, lcol);
  assign l_len    = burst_beats(l_addr, lcol, li.end_col);
  assign arvalid  = (ls == E_ADDR);
  assign araddr   = l_addr;
  assign arlen    = 8'(l_len - 9'd1);
  assign ld_idle  = (ls == E_IDLE) && !lq_valid;

  always_comb begin
    fmu_in_valid = '0;
    rready       = 1'b0;
    if (ls == E_DATA) begin
      fmu_in_valid[li.fmu] = rvalid;
      rready               = fmu_in_ready[li.fmu];
    end
  end
  assign fmu_in_data = rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= E_IDLE; li <= '0; lrow <= '0; lcol <= '0; lbeats <= '0; ld_done <= 1'b0;
    end else begin
      if (clear) ld_done <= 1'b0;
      case (ls)
        E_IDLE: if (lq_valid) begin
          li   <= lq_i;
          lrow <= lq_i.start_row;
          lcol <= lq_i.start_col;
          if (tile_empty(lq_i)) begin
            if (lq_i.is_last) ld_done <= 1'b1;
          end else begin
            ls <= E_ADDR;
          end
        end
        E_ADDR: if (arready) begin
          lbeats <= l_len;
          lcol   <= lcol + dim_t'(l_len);
          ls     <= E_DATA;
        end
        E_DATA: if (rvalid && rready) begin
          lbeats <= lbeats - 1'b1;
          if (lbeats == 9'd1) begin
            if (lcol == li.end_col) begin
              lcol <= li.start_col;
              lrow <= lrow + 1'b1;
              if (lrow + 1'b1 == li.end_row) begin
                ls <= E_IDLE;
                if (li.is_last) ld_done <= 1'b1;
              end else ls <= E_ADDR;
            end else ls <= E_ADDR;
          end
        end
        default: ls <= E_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ Storer
  logic       sq_valid, sq_ready;
  iword_t     sq_data;
  eng_e       ss;
  iom_instr_t si;
  dim_t       srow, scol;
  logic [8:0] sbeats;
  logic       s_tile_end;
  logic [31:0] s_addr;
  logic [8:0]  s_len;

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(IQ_DEPTH)) u_sq (
    .clk, .rst_n, .in_valid(st_instr_valid), .in_ready(st_instr_ready), .in_data(st_instr_data),
    .out_valid(sq_valid), .out_ready(sq_ready), .out_data(sq_data));

  iom_instr_t sq_i;
  assign sq_i     = iom_instr_t'(sq_data[$bits(iom_instr_t)-1:0]);
  assign sq_ready = (ss == E_IDLE);
  assign s_addr   = elem_addr(si, srow, scol);
  assign s_len    = burst_beats(s_addr, scol, si.end_col);
  assign awvalid  = (ss == E_ADDR);
  assign awaddr   = s_addr;
  assign awlen    = 8'(s_len - 9'd1);
  assign wlast    = (sbeats == 9'd1);
  assign bready   = (ss == E_RESP);
  assign st_idle  = (ss == E_IDLE) && !sq_valid;

  always_comb begin
    fmu_out_ready = '0;
    wvalid        = 1'b0;
    wdata         = fmu_out_data[si.fmu];
    if (ss == E_DATA) begin
      wvalid                = fmu_out_valid[si.fmu];
      fmu_out_ready[si.fmu] = wready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ss <= E_IDLE; si <= '0; srow <= '0; scol <= '0; sbeats <= '0; st_done <= 1'b0;
      s_tile_end <= 1'b0;
    end else begin
      if (clear) st_done <= 1'b0;
      case (ss)
        E_IDLE: if (sq_valid) begin
          si   <= sq_i;
          srow <= sq_i.start_row;
          scol <= sq_i.start_col;
          if (tile_empty(sq_i)) begin
            if (sq_i.is_last) st_done <= 1'b1;
          end else begin
            ss <= E_ADDR;
          end
        end
        E_ADDR: if (awready) begin
          sbeats <= s_len;
          scol   <= scol + dim_t'(s_len);
          ss     <= E_DATA;
        end
        E_DATA: if (wvalid && wready) begin
          sbeats <= sbeats - 1'b1;
          if (sbeats == 9'd1) begin
            ss <= E_RESP;
            s_tile_end <= (scol == si.end_col) && (srow + 1'b1 == si.end_row);
            if (scol == si.end_col) begin
              scol <= si.start_col;
              srow <= srow + 1'b1;
            end
          end
        end
        E_RESP: if (bvalid) begin
          if (s_tile_end) begin
            ss <= E_IDLE;
            if (si.is_last) st_done <= 1'b1;
          end else ss <= E_ADDR;
        end
        default: ss <= E_IDLE;
      endcase
    end
  end

  // AXI rule: a burst ends with rlast exactly on its final beat.
  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
    (ls == E_DATA && rvalid && rready) |-> (rlast == (lbeats == 9'd1)));
  a_ld_fmu: assert property (@(posedge clk) disable iff (!rst_n)
    (ls != E_IDLE) |-> (32'(li.fmu) < N_FMU));
  a_st_fmu: assert property (@(posedge clk) disable iff (!rst_n)
    (ss != E_IDLE) |-> (32'(si.fmu) < N_FMU));
endmodule
