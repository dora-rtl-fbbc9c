// dora_lmu -- Local Memory Unit: a flexible, ping-pong tile buffer.
//
// DORA keeps its on-chip data in many identical LMUs instead of buffers
// sized for one operand shape. Each LMU has two banks (ping and pong) of
// BANK_DEPTH words. The tile shape is not fixed: an instruction gives the row
// length (row_len) and the word of tile element (r, c) is at r*row_len + c,
// so a 256x256, a 128x512 or a 32x2048 tile packs the bank without padding.
// The role of an LMU (LHS, RHS or OUT of a matrix multiply, or SFU data) is
// set only by where its instructions route data.
//
// One instruction may load and send at the same time:
//   load (load_op): take words from unit src_pu on the network and write the
//     rectangle rows start_row..end_row, cols start_col..end_col, row by row,
//     into bank ping_buf;
//   send (send_op): read the same rectangle from bank pong_buf and stream it
//     to unit des_pu, repeating it `count` times (0 counts as 1) so that one
//     tile can feed several multiply iterations.
// The next instruction is taken when both parts have finished. The send has
// one registered read stage and moves one word per cycle when the receiver
// is ready. `done` rises after the is_last instruction completes.
// From the paper: the fields, ping-pong banks and programmable tile shape
// and function. The row_len field, the semantics of each field and the
// memory organisation are this design's choices (the paper has no row
// length field for the LMU).
module dora_lmu
  import dora_pkg::*;
#(
  parameter int BANK_DEPTH = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction stream from the IDU
  input  logic        ins_valid,
  output logic        ins_ready,
  input  logic [31:0] ins_data,
  // network output
  output logic        o_valid,
  input  logic        o_ready,
  output word_t       o_data,
  output uid_t        o_dst,
  // network input
  input  logic        i_valid,
  output logic        i_ready,
  input  word_t       i_data,
  output uid_t        i_src,
  // status
  output logic        done
);
  localparam int AW = $clog2(BANK_DEPTH);

  logic                   rx_valid, rx_ready;
  hdr_t                   rx_hdr;
  logic [MAX_BODY*32-1:0] rx_body;
  lmu_body_t              nb;

  dora_instr_rx u_rx (
    .clk, .rst_n,
    .in_valid(ins_valid), .in_ready(ins_ready), .in_data(ins_data),
    .ins_valid(rx_valid), .ins_ready(rx_ready), .ins_hdr(rx_hdr), .ins_body(rx_body)
  );
  assign nb = lmu_body_t'(rx_body[MAX_BODY*32-1 -: LMU_BODY_WORDS*32]);

  word_t mem [2*BANK_DEPTH];

  lmu_body_t   b;
  logic        run, is_last;
  logic        ld_act, sd_act, sv;
  logic [15:0] ld_r, ld_c, sd_r, sd_c, sd_rep;
  word_t       sdata;

  assign rx_ready = !run;
  wire   accept   = rx_valid && rx_ready;

  assign i_ready = ld_act;
  assign i_src   = b.src_pu;
  assign o_valid = sv;
  assign o_data  = sdata;
  assign o_dst   = b.des_pu;

  wire [AW:0] ld_addr = {b.ping_buf, AW'(32'(ld_r) * 32'(b.row_len) + 32'(ld_c))};
  wire [AW:0] sd_addr = {b.pong_buf, AW'(32'(sd_r) * 32'(b.row_len) + 32'(sd_c))};
  wire        ld_beat = ld_act && i_valid;
  wire        sd_read = sd_act && (!sv || o_ready);

  // bank memory: one write port (load), one registered read port (send)
  always_ff @(posedge clk) begin
    if (ld_beat) mem[ld_addr] <= i_data;
    if (sd_read) sdata <= mem[sd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b <= '0; run <= 1'b0; is_last <= 1'b0; done <= 1'b0;
      ld_act <= 1'b0; sd_act <= 1'b0; sv <= 1'b0;
      ld_r <= '0; ld_c <= '0; sd_r <= '0; sd_c <= '0; sd_rep <= '0;
    end else begin
      if (accept) begin
        b       <= nb;
        is_last <= rx_hdr.is_last;
        run     <= 1'b1;
        ld_act  <= nb.load_op;
        sd_act  <= nb.send_op;
        ld_r    <= nb.start_row; ld_c <= nb.start_col;
        sd_r    <= nb.start_row; sd_c <= nb.start_col;
        sd_rep  <= (nb.count == '0) ? 16'd1 : nb.count;
      end else if (run) begin
        // load part
        if (ld_beat) begin
          if (ld_c == b.end_col) begin
            ld_c <= b.start_col;
            if (ld_r == b.end_row) ld_act <= 1'b0;
            else                   ld_r   <= ld_r + 1'b1;
          end else ld_c <= ld_c + 1'b1;
        end
        // send part
        if (sd_read) begin
          sv <= 1'b1;
          if (sd_c == b.end_col) begin
            sd_c <= b.start_col;
            if (sd_r == b.end_row) begin
              sd_r <= b.start_row;
              if (sd_rep == 16'd1) sd_act <= 1'b0;
              sd_rep <= sd_rep - 1'b1;
            end else sd_r <= sd_r + 1'b1;
          end else sd_c <= sd_c + 1'b1;
        end else if (o_ready) begin
          sv <= 1'b0;
        end
        if (!ld_act && !sd_act && !sv) begin
          run <= 1'b0;
          if (is_last) done <= 1'b1;
        end
      end
    end
  end

  // a rectangle must fit its bank
  property p_fits;
    @(posedge clk) disable iff (!rst_n)
      accept |-> (32'(nb.end_row) * 32'(nb.row_len) + 32'(nb.end_col) < 32'(BANK_DEPTH));
  endproperty
  a_fits: assert property (p_fits);
endmodule
