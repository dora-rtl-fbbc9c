// dora_sfu -- Special Function Unit: row-wise Softmax, GeLU and LayerNorm.
//
// Non-linear layers in DNNs reduce along a matrix row, so the SFU works one
// row at a time: it receives ele_num words into a line buffer, computes the
// function over the row, and streams ele_num results out; it repeats this for
// `count` rows, then takes the next instruction. A row may be spread over
// several LMUs: with src_num = S the row is gathered as S equal segments
// of ele_num/S words from LMUs src_lmu, src_lmu+1, ... src_lmu+S-1 in turn,
// and with des_num = D the results are split the same way over LMUs
// des_lmu .. des_lmu+D-1 (0 counts as 1). op_type selects the function:
//   Softmax    pass 1 while receiving: row maximum; pass 2: e_i = exp(x_i-max)
//              written back to the line buffer, sum accumulated; send e_i/sum.
//   GeLU       send x * sigmoid(1.702 x) (a common GeLU approximation).
//   LayerNorm  mean while receiving; pass 2: variance; then 1/sqrt(var+eps),
//              eps = 2^-16; send (x-mean)/sqrt(var+eps), with no scale/shift.
// exp is computed as a power of two with a quadratic fraction term (see
// dora_pkg::q_exp_neg). Data are Q16.16. Receive and send move one word per
// cycle; each extra pass costs ele_num cycles, LayerNorm two more cycles.
// Division and square root are single-cycle combinational functions, which
// keeps the RTL short at the cost of clock speed.
// From the paper: row-wise processing in a line buffer, gathering a row from
// several LMUs, the three functions, the src_lmu/des_lmu/count/ele_num
// fields. This design's own: the src_num/des_num fields (consecutive LMUs,
// equal segments) and all of the arithmetic.
module dora_sfu
  import dora_pkg::*;
#(
  parameter int MAX_ROW = 4096
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
  localparam int AW = $clog2(MAX_ROW);
  localparam logic signed [31:0] GELU_K = 32'sd111542;   // 1.702 in Q16.16

  logic                   rx_valid, rx_ready;
  hdr_t                   rx_hdr;
  logic [MAX_BODY*32-1:0] rx_body;
  sfu_body_t              nb;

  dora_instr_rx u_rx (
    .clk, .rst_n,
    .in_valid(ins_valid), .in_ready(ins_ready), .in_data(ins_data),
    .ins_valid(rx_valid), .ins_ready(rx_ready), .ins_hdr(rx_hdr), .ins_body(rx_body)
  );
  assign nb = sfu_body_t'(rx_body[MAX_BODY*32-1 -: SFU_BODY_WORDS*32]);

  typedef enum logic [2:0] {S_IDLE, S_RECV, S_PASS, S_MEAN, S_STD, S_SEND} state_e;
  state_e state;

  sfu_body_t   b;
  logic [3:0]  fn;
  logic        is_last;
  logic [15:0] row, idx;
  logic [15:0] in_seg, out_seg;            // segment length on each side
  logic [15:0] seg_c;                      // word within the current segment
  logic [7:0]  seg_i;                      // current segment = LMU offset
  word_t       lbuf [MAX_ROW];
  logic signed [31:0] maxv, mean, stdv;
  logic signed [63:0] sum;

  assign rx_ready = (state == S_IDLE);
  assign i_ready  = (state == S_RECV);
  assign i_src    = lmu_uid(int'(b.src_lmu) + int'(seg_i));
  assign o_dst    = lmu_uid(int'(b.des_lmu) + int'(seg_i));

  wire [15:0] n_src = (nb.src_num == '0) ? 16'd1 : 16'(nb.src_num);
  wire [15:0] n_des = (nb.des_num == '0) ? 16'd1 : 16'(nb.des_num);
  wire        seg_end_in  = (seg_c + 1'b1 == in_seg);
  wire        seg_end_out = (seg_c + 1'b1 == out_seg);
  assign o_valid  = (state == S_SEND);

  wire last_el = (idx + 1'b1 == b.ele_num);
  wire signed [31:0] x    = $signed(lbuf[AW'(idx)]);
  wire signed [31:0] xin  = $signed(i_data);

  // per-element results
  logic signed [31:0] d, y, z, e, s;
  always_comb begin
    d = x - mean;
    z = q_mul(x, GELU_K);
    e = q_exp_neg(z[31] ? z : -z);
    s = z[31] ? q_div(e, Q_ONE + e) : q_div(Q_ONE, Q_ONE + e);
    case (fn)
      OP_SFU_SOFTMAX:   y = q_div(x, 32'(sum));
      OP_SFU_GELU:      y = q_mul(x, s);
      OP_SFU_LAYERNORM: y = q_div(d, stdv);
      default:          y = x;
    endcase
  end
  assign o_data = y;

  wire signed [31:0] ex = q_exp_neg(x - maxv);

  always_ff @(posedge clk) begin
    if (state == S_RECV && i_valid) lbuf[AW'(idx)] <= i_data;
    if (state == S_PASS && fn == OP_SFU_SOFTMAX) lbuf[AW'(idx)] <= ex;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; b <= '0; fn <= '0; is_last <= 1'b0; done <= 1'b0;
      row <= '0; idx <= '0; maxv <= '0; mean <= '0; stdv <= Q_ONE; sum <= '0;
      in_seg <= 16'd1; out_seg <= 16'd1; seg_c <= '0; seg_i <= '0;
    end else begin
      case (state)
        S_IDLE: if (rx_valid) begin
          b <= nb; fn <= rx_hdr.op_type; is_last <= rx_hdr.is_last;
          row <= '0; idx <= '0; sum <= '0; seg_c <= '0; seg_i <= '0;
          in_seg  <= nb.ele_num / n_src;
          out_seg <= nb.ele_num / n_des;
          if (nb.count == '0 || nb.ele_num == '0) begin
            if (rx_hdr.is_last) done <= 1'b1;
          end else state <= S_RECV;
        end
        S_RECV: if (i_valid) begin
          if (idx == '0 || xin > maxv) maxv <= xin;
          sum <= sum + 64'(xin);
          idx <= idx + 1'b1;
          seg_c <= seg_c + 1'b1;
          if (seg_end_in) begin seg_c <= '0; seg_i <= seg_i + 1'b1; end
          if (last_el) begin
            idx <= '0; seg_c <= '0; seg_i <= '0;
            case (fn)
              OP_SFU_SOFTMAX:   begin state <= S_PASS; sum <= '0; end
              OP_SFU_LAYERNORM: state <= S_MEAN;
              default:          state <= S_SEND;
            endcase
          end
        end
        S_MEAN: begin
          mean  <= 32'(sum / $signed(64'(b.ele_num)));
          sum   <= '0;
          state <= S_PASS;
        end
        S_PASS: begin
          if (fn == OP_SFU_SOFTMAX) sum <= sum + 64'(ex);
          else                      sum <= sum + 64'(q_mul(d, d));
          idx <= idx + 1'b1;
          if (last_el) begin
            idx   <= '0;
            state <= (fn == OP_SFU_SOFTMAX) ? S_SEND : S_STD;
          end
        end
        S_STD: begin
          stdv  <= q_sqrt(32'(sum / $signed(64'(b.ele_num))) + 32'sd1);
          state <= S_SEND;
        end
        S_SEND: if (o_ready) begin
          idx <= idx + 1'b1;
          seg_c <= seg_c + 1'b1;
          if (seg_end_out) begin seg_c <= '0; seg_i <= seg_i + 1'b1; end
          if (last_el) begin
            idx <= '0; seg_c <= '0; seg_i <= '0;
            if (row + 1'b1 == b.count) begin
              state <= S_IDLE;
              if (is_last) done <= 1'b1;
            end else begin
              row   <= row + 1'b1;
              sum   <= '0;
              state <= S_RECV;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_row: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && rx_valid) |-> int'(nb.ele_num) <= MAX_ROW);
  a_seg: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && rx_valid) |->
      (nb.ele_num % n_src == '0) && (nb.ele_num % n_des == '0));
endmodule
