// dora_mmu -- Matrix Multiplication Unit with run-time loop bounds.
//
// In the paper an MMU is a 4x4x4 group of VLIW vector processors (AMD AI
// Engines) behind PL-side LHS/RHS/OUT buffers and a routing interface. Its
// key property is that the loop bounds of the matrix kernel come from the
// instruction (bound_i, bound_k, bound_j) instead of being compiled in, so
// one program serves every tile shape without padding. This RTL keeps the
// buffers, the routing interface and the run-time bounds, and computes with
// one sequential Q16.16 multiply-accumulate per bank in place of the vector
// processors (the paper notes an MMU may also be built on PL fabric).
//
// Buffers: two banks, ping and pong, each with LHS (bound_i x bound_k), RHS
// (bound_k x bound_j) and OUT (bound_i x bound_j), stored compactly row-major
// with the instruction's bounds as row lengths. An instruction carries one
// operation for each bank (ping_op, pong_op):
//   LOAD_LHS / LOAD_RHS  take bound_i*bound_k / bound_k*bound_j words from
//                        LMU src_lmu;
//   COMPUTE              OUT += LHS x RHS, loops i, j, k as in the paper's
//                        Fig. 4(b), one multiply-accumulate per cycle;
//   STORE                send OUT (bound_i*bound_j words) to LMU des_lmu; the
//                        next COMPUTE then starts from zero instead of
//                        accumulating (a per-bank flag, also set by reset,
//                        so the OUT memory itself needs no clearing);
//   NOP.
// Both banks work at once (e.g. compute on ping while pong loads); if both
// need the input or both the output port, ping goes first. The next
// instruction is taken when both banks are finished. An empty input stream
// simply stalls the loading bank (back-pressure). `done` rises after the
// is_last instruction completes. The op encoding and the bank semantics of
// ping_op/pong_op are this design's reading of the paper's field names.
module dora_mmu
  import dora_pkg::*;
#(
  parameter int MAX_I = 128,
  parameter int MAX_K = 128,
  parameter int MAX_J = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction stream from the IDU
  input  logic        ins_valid,
  output logic        ins_ready,
  input  logic [31:0] ins_data,
  // network output (OUT results)
  output logic        o_valid,
  input  logic        o_ready,
  output word_t       o_data,
  output uid_t        o_dst,
  // network input (LHS / RHS operands)
  input  logic        i_valid,
  output logic        i_ready,
  input  word_t       i_data,
  output uid_t        i_src,
  // status
  output logic        done,
  output logic        in_stall      // a bank waits for operand data
);
  localparam int LW = $clog2(MAX_I*MAX_K);
  localparam int RW = $clog2(MAX_K*MAX_J);
  localparam int OW = $clog2(MAX_I*MAX_J);

  logic                   rx_valid, rx_ready;
  hdr_t                   rx_hdr;
  logic [MAX_BODY*32-1:0] rx_body;
  mmu_body_t              nb;

  dora_instr_rx u_rx (
    .clk, .rst_n,
    .in_valid(ins_valid), .in_ready(ins_ready), .in_data(ins_data),
    .ins_valid(rx_valid), .ins_ready(rx_ready), .ins_hdr(rx_hdr), .ins_body(rx_body)
  );
  assign nb = mmu_body_t'(rx_body[MAX_BODY*32-1 -: MMU_BODY_WORDS*32]);

  mmu_body_t b;
  logic      run, is_last;
  logic [1:0] bdone;
  wire       start = rx_valid && !run;
  assign rx_ready = !run;

  wire [15:0] bi = 16'(b.bound_i);
  wire [15:0] bk = 16'(b.bound_k);
  wire [15:0] bj = 16'(b.bound_j);

  // port requests and grants (ping first)
  logic [1:0] in_req, out_req, in_gnt, out_gnt;
  logic [1:0] sv;
  word_t      sdata [2];
  mmu_op_e    op [2];
  assign op[0] = mmu_op_e'(b.ping_op);
  assign op[1] = mmu_op_e'(b.pong_op);

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      in_req[k]  = run && !bdone[k] && (op[k] == MMU_LOAD_LHS || op[k] == MMU_LOAD_RHS);
      out_req[k] = run && !bdone[k] && (op[k] == MMU_STORE);
    end
    in_gnt[0]  = in_req[0];
    in_gnt[1]  = in_req[1] && !in_req[0];
    out_gnt[0] = out_req[0];
    out_gnt[1] = out_req[1] && !out_req[0];
  end

  assign i_ready  = |in_gnt;
  assign i_src    = in_gnt[0] ? lmu_uid(int'(b.src_lmu)) :
                    in_gnt[1] ? lmu_uid(int'(b.src_lmu)) : '0;
  assign o_valid  = out_gnt[0] ? sv[0] : (out_gnt[1] ? sv[1] : 1'b0);
  assign o_data   = out_gnt[1] ? sdata[1] : sdata[0];
  assign o_dst    = lmu_uid(int'(b.des_lmu));
  assign in_stall = (|in_gnt) && !i_valid;

  for (genvar g = 0; g < 2; g++) begin : g_bank
    word_t lhs  [MAX_I*MAX_K];
    word_t rhs  [MAX_K*MAX_J];
    word_t outb [MAX_I*MAX_J];

    logic [15:0] cnt;
    logic [7:0]  ci, cj, ck;
    word_t       acc;
    logic [15:0] total;

    always_comb begin
      case (op[g])
        MMU_LOAD_LHS: total = bi * bk;
        MMU_LOAD_RHS: total = bk * bj;
        MMU_STORE:    total = bi * bj;
        default:      total = '0;
      endcase
    end

    // datapath for the current element
    wire [LW-1:0] l_idx = LW'(16'(ci) * bk + 16'(ck));
    wire [RW-1:0] r_idx = RW'(16'(ck) * bj + 16'(cj));
    wire [OW-1:0] o_idx = OW'(16'(ci) * bj + 16'(cj));
    logic fresh;     // OUT holds no partial sums: the next COMPUTE starts from zero
    wire signed [31:0] acc_in  = (ck != 8'd0) ? $signed(acc) :
                                 fresh ? 32'sd0 : $signed(outb[o_idx]);
    wire signed [31:0] acc_nxt = acc_in + q_mul($signed(lhs[l_idx]), $signed(rhs[r_idx]));

    wire active  = run && !bdone[g];
    wire ld_beat = active && in_gnt[g] && i_valid;
    wire mac     = active && (op[g] == MMU_COMPUTE);
    wire st_rd   = active && out_gnt[g] && (cnt < total) && (!sv[g] || o_ready);
    wire last_k  = (16'(ck) + 1 == bk);

    always_ff @(posedge clk) begin
      if (ld_beat && op[g] == MMU_LOAD_LHS) lhs[LW'(cnt)] <= i_data;
      if (ld_beat && op[g] == MMU_LOAD_RHS) rhs[RW'(cnt)] <= i_data;
      if (mac && last_k)                    outb[o_idx]   <= acc_nxt;
      if (st_rd) sdata[g] <= outb[OW'(cnt)];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        bdone[g] <= 1'b1; cnt <= '0; ci <= '0; cj <= '0; ck <= '0;
        acc <= '0; sv[g] <= 1'b0; fresh <= 1'b1;
      end else if (start) begin
        cnt <= '0; ci <= '0; cj <= '0; ck <= '0; sv[g] <= 1'b0;
        bdone[g] <= (nb.ping_op == MMU_NOP && g == 0) || (nb.pong_op == MMU_NOP && g == 1) ||
                    nb.bound_i == '0 || nb.bound_k == '0 || nb.bound_j == '0;
      end else if (active) begin
        case (op[g])
          MMU_LOAD_LHS, MMU_LOAD_RHS: if (ld_beat) begin
            cnt <= cnt + 1'b1;
            if (cnt + 1'b1 == total) bdone[g] <= 1'b1;
          end
          MMU_COMPUTE: begin
            if (last_k) begin
              ck <= '0;
              if (16'(cj) + 1 == bj) begin
                cj <= '0;
                if (16'(ci) + 1 == bi) begin
                  bdone[g] <= 1'b1;
                  fresh    <= 1'b0;
                end
                else ci <= ci + 1'b1;
              end else cj <= cj + 1'b1;
            end else begin
              acc <= acc_nxt;
              ck  <= ck + 1'b1;
            end
          end
          MMU_STORE: begin
            if (st_rd) begin
              sv[g] <= 1'b1;
              cnt   <= cnt + 1'b1;
            end else if (o_ready && out_gnt[g]) begin
              sv[g] <= 1'b0;
              if (cnt == total) begin
                bdone[g] <= 1'b1;
                fresh    <= 1'b1;
              end
            end
          end
          default: bdone[g] <= 1'b1;
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b <= '0; run <= 1'b0; is_last <= 1'b0; done <= 1'b0;
    end else if (start) begin
      b <= nb; run <= 1'b1; is_last <= rx_hdr.is_last;
    end else if (run && (&bdone)) begin
      run <= 1'b0;
      if (is_last) done <= 1'b1;
    end
  end

  a_bounds: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (int'(nb.bound_i) <= MAX_I && int'(nb.bound_k) <= MAX_K && int'(nb.bound_j) <= MAX_J));
endmodule
