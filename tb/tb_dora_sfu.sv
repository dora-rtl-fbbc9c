// tb_dora_sfu -- runs Softmax (2 rows of 16), GeLU (1 row of 24), Softmax
// on 2 rows of 32 gathered from LMU1..LMU4 and split over LMU5..LMU6, and
// LayerNorm (3 rows of 48 gathered from LMU1..LMU2) on random Q16.16 rows,
// checks the source the unit selects for every input word and the
// destination of every result, and compares each result with real-number
// math:
//   softmax  e^(x_i - max) / sum_j e^(x_j - max)     tolerance 0.004
//   GeLU     0.5 x (1 + erf(x / sqrt 2)) via tanh form   tolerance 0.03
//   LayerNorm (x - mean) / sqrt(var + 2^-16)          tolerance 0.01
// (the GeLU tolerance covers the sigmoid approximation the unit uses).
// Also checks the row timing of GeLU: one word per cycle in and out.
module tb_dora_sfu;
  import dora_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_valid = 0, ins_ready;
  logic [31:0] ins_data = 0;
  logic o_valid, o_ready = 1;
  word_t o_data;
  uid_t o_dst;
  logic i_valid = 0, i_ready;
  word_t i_data = 0;
  uid_t i_src;
  logic done;

  dora_sfu dut (.*);

  real exp_q [$];
  real tol_q [$];
  int  nsent = 0;

  task automatic send_word(input logic [31:0] w);
    @(negedge clk);
    ins_valid = 1; ins_data = w;
    #1;
    while (!ins_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ins_valid = 0;
  endtask

  task automatic push_row(input logic [31:0] q, input int src);
    @(negedge clk);
    i_valid = 1; i_data = q;
    #1;
    while (!i_ready) begin @(negedge clk); #1; end
    checks++;
    if (i_src != uid_t'(src)) begin failures++; $display("FAIL source %0d", i_src); end
    @(posedge clk);
    #1 i_valid = 0;
  endtask

  int  dst_q [$];

  // rows of n words gathered from srcn LMUs (LMU1..) and split over desn LMUs (LMU5..)
  task automatic run(input int op, input int rows, input int n, input bit last,
                     input int srcn = 1, input int desn = 1);
    sfu_body_t b;
    logic [31:0] q [64];
    real x [64];
    b = '0; b.src_lmu = 1; b.des_lmu = 5; b.count = 16'(rows); b.ele_num = 16'(n);
    b.src_num = 8'(srcn); b.des_num = 8'(desn);
    send_word(mk_hdr(last, op, 21, SFU_BODY_WORDS));
    for (int w = 0; w < SFU_BODY_WORDS; w++) send_word(sfu_word(b, w));
    for (int r = 0; r < rows; r++) begin
      real mx, s, mean, v;
      for (int i = 0; i < n; i++) begin
        q[i] = r2q((real'($urandom_range(0, 8000)) - 4000.0) / 1000.0);
        x[i] = q2r(q[i]);
      end
      mx = x[0]; s = 0; mean = 0; v = 0;
      for (int i = 0; i < n; i++) if (x[i] > mx) mx = x[i];
      for (int i = 0; i < n; i++) begin s += $exp(x[i] - mx); mean += x[i]; end
      mean /= n;
      for (int i = 0; i < n; i++) v += (x[i] - mean) * (x[i] - mean);
      v /= n;
      for (int i = 0; i < n; i++) begin
        real y, t;
        case (op)
          OP_SFU_SOFTMAX: begin y = $exp(x[i] - mx) / s; t = 0.004; end
          OP_SFU_GELU: begin
            t = $tanh(0.7978845608 * (x[i] + 0.044715 * x[i]*x[i]*x[i]));
            y = 0.5 * x[i] * (1.0 + t); t = 0.03;
          end
          default: begin y = (x[i] - mean) / $sqrt(v + 1.0/65536.0); t = 0.01; end
        endcase
        exp_q.push_back(y); tol_q.push_back(t); dst_q.push_back(6 + i / (n / desn));
      end
      for (int i = 0; i < n; i++) push_row(q[i], 2 + i / (n / srcn));
    end
  endtask

  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    checks++;
    nsent++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL extra word"); end
    else begin
      real e, t, g;
      e = exp_q.pop_front(); t = tol_q.pop_front(); g = q2r(o_data);
      if (o_dst != uid_t'(dst_q.pop_front())) begin failures++; $display("FAIL destination %0d", o_dst); end
      if (g - e > t || e - g > t) begin failures++; $display("FAIL got %f expected %f", g, e); end
    end
  end

  initial begin
    int t0, n0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(OP_SFU_SOFTMAX, 2, 16, 0);
    while (exp_q.size() != 0) @(posedge clk);
    // GeLU timing: from the first input beat to the last output beat
    n0 = nsent;
    t0 = $time;
    run(OP_SFU_GELU, 1, 24, 0);
    while (exp_q.size() != 0) @(posedge clk);
    checks++;
    if (($time - t0) / 10 > 2*24 + 12) begin failures++; $display("FAIL GeLU row took %0d cycles", ($time - t0)/10); end
    // a row gathered from 4 LMUs and returned to 2
    run(OP_SFU_SOFTMAX, 2, 32, 0, 4, 2);
    while (exp_q.size() != 0) @(posedge clk);
    run(OP_SFU_LAYERNORM, 3, 48, 1, 2, 1);
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
