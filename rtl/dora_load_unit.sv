// dora_load_unit -- MIU Load Unit: DRAM to LMU transfers.
//
// Takes MIU instructions from the Sync Unit in order. A load instruction
// reads the rectangle rows start_row..end_row, columns start_col..end_col of
// an M x N row-major matrix at DRAM word address ddr_addr, row by row, and
// streams the words to LMU des_lmu over the network. A store instruction is
// not executed here: it is handed on, in order, to the Store Unit's queue.
// `last_seen` rises once the instruction flagged is_last has been executed
// or handed on.
//
// DRAM read port: request (valid/ready, word address) and in-order response
// (rvalid, rdata); one read is outstanding at a time, so a word takes about
// three cycles plus the network handshake. From the paper: the unit's role
// and the fields ddr_addr, des_lmu, M, N and the row/column ranges. The
// address formula and the single-outstanding-read port are this design's.
// A store instruction is handed on as it is: st_hdr/st_body are wires from
// the input, and only st_valid and in_ready depend on this unit's state.
module dora_load_unit
  import dora_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // instructions from the Sync Unit
  input  logic        in_valid,
  output logic        in_ready,
  input  hdr_t        in_hdr,
  input  miu_body_t   in_body,
  // store instructions to the Store Unit
  output logic        st_valid,
  input  logic        st_ready,
  output hdr_t        st_hdr,
  output miu_body_t   st_body,
  // DRAM read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output logic [31:0] rd_req_addr,
  input  logic        rd_rvalid,
  input  word_t       rd_rdata,
  // network output
  output logic        o_valid,
  input  logic        o_ready,
  output word_t       o_data,
  output uid_t        o_dst,
  // status
  output logic        last_seen
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_SEND} state_e;
  state_e    state;
  miu_body_t b;
  logic      is_last;
  logic [15:0] r, c;
  word_t     data_q;

  wire is_store = (in_hdr.op_type == OP_MIU_STORE);

  assign st_valid = (state == S_IDLE) && in_valid && is_store;
  assign st_hdr   = in_hdr;
  assign st_body  = in_body;
  assign in_ready = (state == S_IDLE) && (is_store ? st_ready : 1'b1);

  assign rd_req_valid = (state == S_REQ);
  assign rd_req_addr  = b.ddr_addr + 32'(r) * 32'(b.n) + 32'(c);
  assign o_valid      = (state == S_SEND);
  assign o_data       = data_q;
  assign o_dst        = lmu_uid(int'(b.des_lmu));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; b <= '0; is_last <= 1'b0; r <= '0; c <= '0;
      data_q <= '0; last_seen <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          if (is_store) begin
            if (in_hdr.is_last) last_seen <= 1'b1;
          end else begin
            b       <= in_body;
            is_last <= in_hdr.is_last;
            r       <= in_body.start_row;
            c       <= in_body.start_col;
            state   <= S_REQ;
          end
        end
        S_REQ:  if (rd_req_ready) state <= S_WAIT;
        S_WAIT: if (rd_rvalid) begin
          data_q <= rd_rdata;
          state  <= S_SEND;
        end
        S_SEND: if (o_ready) begin
          if (c == b.end_col) begin
            c <= b.start_col;
            if (r == b.end_row) begin
              state <= S_IDLE;
              if (is_last) last_seen <= 1'b1;
            end else begin
              r     <= r + 1'b1;
              state <= S_REQ;
            end
          end else begin
            c     <= c + 1'b1;
            state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
