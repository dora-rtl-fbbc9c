// dora_instr_rx -- instruction receiver in front of every function unit.
//
// The IDU sends each instruction to its unit as a stream of 32-bit words: one
// header, then valid_length body words. This block collects those words and
// presents the whole instruction at once: the decoded header and the body,
// body word 0 in the most significant 32 bits of `body` (so a unit can cast
// the top bits straight to its body struct). It holds one instruction; the
// unit takes it with ins_valid/ins_ready and the next one is collected after
// that. Body words past valid_length read as zero. Words beyond MAX_BODY are
// dropped. The paper says each unit "continuously loads and decodes
// instructions"; the one-instruction buffer is this design's choice.
module dora_instr_rx
  import dora_pkg::*;
#(
  parameter int MAX_BODY_W = MAX_BODY
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // word stream from the IDU
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [31:0]             in_data,
  // assembled instruction
  output logic                    ins_valid,
  input  logic                    ins_ready,
  output hdr_t                    ins_hdr,
  output logic [MAX_BODY_W*32-1:0] ins_body
);
  logic       have_hdr;
  logic [7:0] remain;     // body words still to come
  logic [7:0] widx;       // next body word index

  assign in_ready = !ins_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ins_valid <= 1'b0;
      have_hdr  <= 1'b0;
      remain    <= '0;
      widx      <= '0;
      ins_hdr   <= '0;
      ins_body  <= '0;
    end else begin
      if (ins_valid && ins_ready) ins_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (!have_hdr) begin
          ins_hdr  <= hdr_t'(in_data);
          ins_body <= '0;
          widx     <= '0;
          remain   <= in_data[18:11];
          if (in_data[18:11] == 8'd0) ins_valid <= 1'b1;
          else                        have_hdr  <= 1'b1;
        end else begin
          if (widx < 8'(MAX_BODY_W))
            ins_body[(MAX_BODY_W-1-int'(widx))*32 +: 32] <= in_data;
          widx   <= widx + 1'b1;
          remain <= remain - 1'b1;
          if (remain == 8'd1) begin
            have_hdr  <= 1'b0;
            ins_valid <= 1'b1;
          end
        end
      end
    end
  end
endmodule
