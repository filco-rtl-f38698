// filco_top: the FILCO accelerator, data plane plus control plane.
//
// Data plane: N_FMU Flexible Memory Units, N_CU Compute Units of K_AIE AIE
// kernels each, and one IO Manager. Every FMU has a pre-routed stream to
// and from every CU (fully-connected, no arbitration: an FMU sends to one
// CU at a time, a CU loads from one FMU at a time, and the instruction
// fields select which), and a stream from the IO Manager's loader and to
// its storer. Control plane: the Instruction Generator reads the program
// from the off-chip instruction memory and hands each instruction to its
// unit's queue (unit numbering in filco_pkg). Units synchronise only
// through their data streams: a CU load waits until the FMU sends, an FMU
// receive waits until the loader delivers, so the program decides the
// schedule and the hardware keeps it safe.
//
// Off-chip memory and instruction memory are outside: the top exposes an
// AXI4 master (32-bit data, INCR bursts, one burst per direction in flight)
// and a simple instruction-memory read port. `start` launches the program
// at word address instr_base and clears all done flags; `done` rises when
// the Instruction Generator has read the last packet and every unit has
// executed an instruction flagged is_last.
//
// Structure and interconnect follow the paper's architecture figure. The
// default sizes N_FMU = 9 (the paper's flexible-memory example uses nine
// FMUs of 128x128 elements, hence FMU_DEPTH = 16384), N_CU = 3 and K_AIE = 8
// are this design's choices: the paper leaves N, M and K to its design
// space exploration.
module filco_top
  import filco_pkg::*;
#(
  parameter int N_FMU     = 9,
  parameter int N_CU      = 3,
  parameter int K_AIE     = 8,
  parameter int FMU_DEPTH = 16384,
  parameter int IQ_DEPTH  = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [31:0]  instr_base,
  output logic         busy,
  output logic         done,
  // instruction memory
  output logic         im_req_valid,
  input  logic         im_req_ready,
  output logic [31:0]  im_req_addr,
  input  logic         im_rsp_valid,
  input  iword_t       im_rsp_data,
  // AXI4 master to off-chip memory
  output logic         arvalid,
  input  logic         arready,
  output logic [31:0]  araddr,
  output logic [7:0]   arlen,
  input  logic         rvalid,
  output logic         rready,
  input  data_t        rdata,
  input  logic         rlast,
  output logic         awvalid,
  input  logic         awready,
  output logic [31:0]  awaddr,
  output logic [7:0]   awlen,
  output logic         wvalid,
  input  logic         wready,
  output data_t        wdata,
  output logic         wlast,
  input  logic         bvalid,
  output logic         bready,
  // observation: which AIEs are in their compute phase
  output logic [N_CU*K_AIE-1:0] aie_computing
);
  localparam int N_UNITS = 2 + N_FMU + N_CU;
  localparam int U_FMU0  = 2;
  localparam int U_CU0   = 2 + N_FMU;

  // instruction streams
  logic [N_UNITS-1:0] iv, ir;
  iword_t             idata;
  logic               ig_busy, ig_done;

  instr_gen #(.N_UNITS(N_UNITS)) u_ig (
    .clk, .rst_n, .start, .base_addr(instr_base), .busy(ig_busy), .done(ig_done),
    .im_req_valid, .im_req_ready, .im_req_addr, .im_rsp_valid, .im_rsp_data,
    .out_valid(iv), .out_ready(ir), .out_data(idata));

  // IOM <-> FMU
  logic [N_FMU-1:0] ld_v, ld_r, st_v, st_r;
  data_t            ld_d;
  data_t            st_d [N_FMU];
  logic             ld_done, st_done, ld_idle, st_idle;

  io_manager #(.N_FMU(N_FMU), .IQ_DEPTH(IQ_DEPTH)) u_iom (
    .clk, .rst_n, .clear(start), .ld_done, .st_done, .ld_idle, .st_idle,
    .ld_instr_valid(iv[0]), .ld_instr_ready(ir[0]), .ld_instr_data(idata),
    .st_instr_valid(iv[1]), .st_instr_ready(ir[1]), .st_instr_data(idata),
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .fmu_in_valid(ld_v), .fmu_in_ready(ld_r), .fmu_in_data(ld_d),
    .fmu_out_valid(st_v), .fmu_out_ready(st_r), .fmu_out_data(st_d));

  // FMU <-> CU fully-connected streams, indexed [fmu][cu]
  logic [N_CU-1:0]  f2c_v [N_FMU];
  logic [N_CU-1:0]  f2c_r [N_FMU];
  data_t            f2c_d [N_FMU];
  logic [N_FMU-1:0] c2f_v [N_CU];
  logic [N_FMU-1:0] c2f_r [N_CU];
  data_t            c2f_d [N_CU];
  // the same wires seen from the other end
  logic [N_FMU-1:0] cin_v [N_CU];
  logic [N_FMU-1:0] cin_r [N_CU];
  logic [N_CU-1:0]  fin_v [N_FMU];
  logic [N_CU-1:0]  fin_r [N_FMU];

  always_comb begin
    for (int f = 0; f < N_FMU; f++)
      for (int c = 0; c < N_CU; c++) begin
        cin_v[c][f] = f2c_v[f][c];
        f2c_r[f][c] = cin_r[c][f];
        fin_v[f][c] = c2f_v[c][f];
        c2f_r[c][f] = fin_r[f][c];
      end
  end

  logic [N_FMU-1:0] fmu_done, fmu_idle;
  logic [N_CU-1:0]  cu_done, cu_idle;

  for (genvar f = 0; f < N_FMU; f++) begin : g_fmu
    fmu #(.N_CU(N_CU), .BUF_DEPTH(FMU_DEPTH), .IQ_DEPTH(IQ_DEPTH)) u_fmu (
      .clk, .rst_n, .clear(start), .done(fmu_done[f]), .idle(fmu_idle[f]),
      .instr_valid(iv[U_FMU0+f]), .instr_ready(ir[U_FMU0+f]), .instr_data(idata),
      .iom_in_valid(ld_v[f]), .iom_in_ready(ld_r[f]), .iom_in_data(ld_d),
      .iom_out_valid(st_v[f]), .iom_out_ready(st_r[f]), .iom_out_data(st_d[f]),
      .cu_out_valid(f2c_v[f]), .cu_out_ready(f2c_r[f]), .cu_out_data(f2c_d[f]),
      .cu_in_valid(fin_v[f]), .cu_in_ready(fin_r[f]), .cu_in_data(c2f_d));
  end

  for (genvar c = 0; c < N_CU; c++) begin : g_cu
    compute_unit #(.N_FMU(N_FMU), .K_AIE(K_AIE), .IQ_DEPTH(IQ_DEPTH)) u_cu (
      .clk, .rst_n, .clear(start), .done(cu_done[c]), .idle(cu_idle[c]),
      .instr_valid(iv[U_CU0+c]), .instr_ready(ir[U_CU0+c]), .instr_data(idata),
      .fmu_in_valid(cin_v[c]), .fmu_in_ready(cin_r[c]), .fmu_in_data(f2c_d),
      .fmu_out_valid(c2f_v[c]), .fmu_out_ready(c2f_r[c]), .fmu_out_data(c2f_d[c]),
      .aie_computing(aie_computing[c*K_AIE +: K_AIE]));
  end

  assign done = ig_done && ld_done && st_done && (&fmu_done) && (&cu_done);
  assign busy = ig_busy || !(ld_idle && st_idle && (&fmu_idle) && (&cu_idle));
endmodule
