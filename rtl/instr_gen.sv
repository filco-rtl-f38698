// instr_gen: Instruction Generator of the FILCO control plane.
//
// After `start` it reads the program from the off-chip instruction memory,
// beginning at word address `base_addr`. The program is a sequence of
// packets: one header word {is_last, des_unit, valid_length} (filco_pkg::
// ig_hdr_t) followed by valid_length instruction words, each of which is
// handed unchanged to unit `des_unit` over that unit's valid/ready stream.
// The packet whose header has is_last set ends the program; `done` then
// rises and stays high until the next `start`.
//
// The header format and the dispatch by destination unit follow the paper;
// the memory port (one outstanding read, request valid/ready, response
// valid one or more cycles later), one word in flight at a time and the
// unit numbering of filco_pkg are this design's own choices. A word costs
// at least three cycles: request, response, hand-off.
module instr_gen
  import filco_pkg::*;
#(
  parameter int N_UNITS = 14
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        base_addr,
  output logic               busy,
  output logic               done,
  // instruction memory read port
  output logic               im_req_valid,
  input  logic               im_req_ready,
  output logic [31:0]        im_req_addr,
  input  logic               im_rsp_valid,
  input  iword_t             im_rsp_data,
  // one instruction stream per unit, data shared
  output logic [N_UNITS-1:0] out_valid,
  input  logic [N_UNITS-1:0] out_ready,
  output iword_t             out_data
);
  typedef enum logic [2:0] {S_IDLE, S_REQ_HDR, S_WAIT_HDR, S_REQ_W, S_WAIT_W, S_SEND, S_DONE} state_e;
  state_e  state;
  logic [31:0] addr;
  count_t  remaining;
  logic    last_pkt;
  unit_t   dest;
  iword_t  word;
  ig_hdr_t hdr;

  assign hdr          = ig_hdr_t'(im_rsp_data[$bits(ig_hdr_t)-1:0]);
  assign im_req_valid = (state == S_REQ_HDR) || (state == S_REQ_W);
  assign im_req_addr  = addr;
  assign out_data     = word;
  assign busy         = (state != S_IDLE) && (state != S_DONE);
  assign done         = (state == S_DONE);

  always_comb begin
    out_valid = '0;
    if (state == S_SEND) out_valid[dest] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      addr      <= '0;
      remaining <= '0;
      last_pkt  <= 1'b0;
      dest      <= '0;
      word      <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: if (start) begin
          addr  <= base_addr;
          state <= S_REQ_HDR;
        end
        S_REQ_HDR: if (im_req_ready) begin
          addr  <= addr + 32'd1;
          state <= S_WAIT_HDR;
        end
        S_WAIT_HDR: if (im_rsp_valid) begin
          dest      <= hdr.des_unit;
          remaining <= hdr.valid_length;
          last_pkt  <= hdr.is_last;
          if (hdr.valid_length != 0) state <= S_REQ_W;
          else if (hdr.is_last)      state <= S_DONE;
          else                       state <= S_REQ_HDR;
        end
        S_REQ_W: if (im_req_ready) begin
          addr  <= addr + 32'd1;
          state <= S_WAIT_W;
        end
        S_WAIT_W: if (im_rsp_valid) begin
          word  <= im_rsp_data;
          state <= S_SEND;
        end
        S_SEND: if (out_ready[dest]) begin
          remaining <= remaining - 1'b1;
          if (remaining != 1)  state <= S_REQ_W;
          else if (last_pkt)   state <= S_DONE;
          else                 state <= S_REQ_HDR;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A header must name an existing unit.
  a_dest_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WAIT_HDR && im_rsp_valid && hdr.valid_length != 0) |-> (32'(hdr.des_unit) < N_UNITS));
endmodule
