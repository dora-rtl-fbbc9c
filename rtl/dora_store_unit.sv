// dora_store_unit -- MIU Store Unit: LMU to DRAM write-back.
//
// Runs the loop of the paper's Fig. 5: load an instruction from its queue,
// store, send the ready signal, repeat. A store instruction names the LMU
// src_lmu it takes data from and the same rectangle fields as a load
// (ddr_addr, N, row and column ranges); the words arriving from the network
// are written row by row to DRAM address ddr_addr + row*N + col. When the
// instruction carries layer_done (it is the last store of layer layer_id),
// the unit then sends layer_id on the ready stream so the Sync Unit can
// release loads waiting for it. A write counts as complete when the DRAM
// port accepts it. `idle` is high when no store is in progress; `last_seen`
// rises after the is_last instruction finishes.
// From the paper: the loop and the ready signal. The layer_done flag, the
// write port and the address formula are this design's choices.
module dora_store_unit
  import dora_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // store instructions
  input  logic        in_valid,
  output logic        in_ready,
  input  hdr_t        in_hdr,
  input  miu_body_t   in_body,
  // network input
  input  logic        i_valid,
  output logic        i_ready,
  input  word_t       i_data,
  output uid_t        i_src,
  // DRAM write port
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output word_t       wr_data,
  // ready stream to the Sync Unit
  output logic        rdy_valid,
  input  logic        rdy_ready,
  output logic [7:0]  rdy_layer,
  // status
  output logic        idle,
  output logic        last_seen
);
  typedef enum logic [1:0] {S_IDLE, S_RECV, S_WRITE, S_READY} state_e;
  state_e    state;
  miu_body_t b;
  logic      is_last;
  logic [15:0] r, c;
  word_t     data_q;

  assign in_ready  = (state == S_IDLE);
  assign i_ready   = (state == S_RECV);
  assign i_src     = lmu_uid(int'(b.src_lmu));
  assign wr_valid  = (state == S_WRITE);
  assign wr_addr   = b.ddr_addr + 32'(r) * 32'(b.n) + 32'(c);
  assign wr_data   = data_q;
  assign rdy_valid = (state == S_READY);
  assign rdy_layer = b.layer_id;
  assign idle      = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; b <= '0; is_last <= 1'b0; r <= '0; c <= '0;
      data_q <= '0; last_seen <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          b       <= in_body;
          is_last <= in_hdr.is_last;
          r       <= in_body.start_row;
          c       <= in_body.start_col;
          state   <= S_RECV;
        end
        S_RECV: if (i_valid) begin
          data_q <= i_data;
          state  <= S_WRITE;
        end
        S_WRITE: if (wr_ready) begin
          if (c == b.end_col) begin
            c <= b.start_col;
            if (r == b.end_row) begin
              if (b.layer_done) state <= S_READY;
              else begin
                state <= S_IDLE;
                if (is_last) last_seen <= 1'b1;
              end
            end else begin
              r     <= r + 1'b1;
              state <= S_RECV;
            end
          end else begin
            c     <= c + 1'b1;
            state <= S_RECV;
          end
        end
        S_READY: if (rdy_ready) begin
          state <= S_IDLE;
          if (is_last) last_seen <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
