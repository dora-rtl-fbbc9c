// tb_dora_bert_ffn -- one feed-forward block of a BERT-base encoder at
// sequence length 32 (the BERT-32 workload) on the full default overlay:
//   Y = GeLU(LayerNorm(X) x W1) x W2,  X 32x768, W1 768x3072, W2 3072x768.
// The sizes are BERT-base's (hidden 768, feed-forward 3072); the paper names
// the workload but does not list them. The weights (4.7 million words) do not
// fit on chip and are streamed from DRAM tile by tile.
//
// Mapping (this testbench's choice):
//   LMU0 -> SFU0 (LayerNorm, rows of 768) -> LMU1     normalised X
//   MMU m (m = 0..5)  FFN1: output column tiles m, m+6, m+12, m+18 of 128,
//                     K = 768 in six steps; FFN2: output column tile m,
//                     K = 3072 in 24 steps; bound_i = 32 throughout
//   LMU2+m            weight tiles for MMU m, double-buffered: each LMU
//                     instruction loads tile t from the MIU into one bank
//                     while sending tile t-1 from the other bank to MMU m
//   LMU8/9            H = LN(X) x W1, columns 0..1535 / 1536..3071
//   SFU0 (GeLU, rows of 3072 gathered from LMU8+LMU9) -> LMU10/11
//   LMU12             Y, stored to DRAM
// The instructions are listed in time order, step by step.
//
// Reference: real-number LayerNorm, the same x*sigmoid(1.702x) GeLU the SFU
// uses, and exact products. Checks every word of Y (absolute 0.06 plus 2 %;
// Y has a spread of about 1.4) and that SFU0 switched from LayerNorm to GeLU
// and that weight LMUs loaded and sent in the same cycle. Runs about 27
// million cycles.
module tb_dora_bert_ffn;
  import dora_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  logic [31:0] base_addr = 0, prog_len = 0;
  logic busy, done;
  logic imem_req_valid, imem_req_ready = 1, imem_rvalid = 0;
  logic [31:0] imem_req_addr, imem_rdata = 0;
  logic dram_rd_valid, dram_rd_ready, dram_rvalid;
  logic [31:0] dram_rd_addr;
  word_t dram_rdata;
  logic dram_wr_valid, dram_wr_ready;
  logic [31:0] dram_wr_addr;
  word_t dram_wr_data;
  logic sync_stall;
  logic [N_MMU-1:0] mmu_in_stall;

  dora_top dut (.*);

  dram_model #(.DEPTH(1 << 23), .MAX_LAT(0)) u_dram (
    .clk, .rd_valid(dram_rd_valid && rst_n), .rd_ready(dram_rd_ready), .rd_addr(dram_rd_addr),
    .rvalid(dram_rvalid), .rdata(dram_rdata),
    .wr_valid(dram_wr_valid && rst_n), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data));

  // ---------------- instruction memory and program builder ----------------
  logic [31:0] imem [8192];
  int pc = 0;
  int last_hdr [N_UNITS];
  always @(posedge clk) begin
    imem_rvalid <= imem_req_valid && imem_req_ready;
    imem_rdata  <= imem[imem_req_addr % 8192];
  end

  localparam int MIU = 0;
  function automatic int LMU(input int i); return 1 + i; endfunction
  function automatic int MMU(input int i); return 1 + N_LMU + i; endfunction
  function automatic int SFU(input int i); return 1 + N_LMU + N_MMU + i; endfunction

  localparam int T = 32, D = 768, F = 3072;
  localparam int X_AD = 0, W1_AD = 32768, W2_AD = W1_AD + D*F, Y_AD = W2_AD + F*D;

  task automatic emit(input logic [31:0] w); imem[pc] = w; pc++; endtask
  task automatic hdr(input int op, input int unit, input int len);
    last_hdr[unit] = pc;
    emit(mk_hdr(0, op, unit, len));
  endtask

  task automatic miu(input int op, input int ad, input int n,
                     input int sr, input int nr, input int sc, input int nc, input int lmu);
    miu_body_t b;
    b = '0; b.ddr_addr = 32'(ad); b.m = 16'(sr + nr); b.n = 16'(n);
    b.start_row = 16'(sr); b.end_row = 16'(sr + nr - 1); b.start_col = 16'(sc); b.end_col = 16'(sc + nc - 1);
    b.src_lmu = 8'(lmu); b.des_lmu = 8'(lmu); b.layer_id = 8'd1;
    hdr(op, MIU, MIU_BODY_WORDS);
    for (int w = 0; w < MIU_BODY_WORDS; w++) emit(miu_word(b, w));
  endtask

  task automatic lmu(input int idx, input bit ld, input bit ldbank, input int src,
                     input bit sd, input bit sdbank, input int dst, input int rl,
                     input int sr, input int nr, input int sc, input int nc);
    lmu_body_t b;
    b = '0; b.load_op = ld; b.ping_buf = ldbank; b.src_pu = 8'(src);
    b.send_op = sd; b.pong_buf = sdbank; b.des_pu = 8'(dst); b.count = 16'd1; b.row_len = 16'(rl);
    b.start_row = 16'(sr); b.end_row = 16'(sr + nr - 1); b.start_col = 16'(sc); b.end_col = 16'(sc + nc - 1);
    hdr(OP_LMU, LMU(idx), LMU_BODY_WORDS);
    for (int w = 0; w < LMU_BODY_WORDS; w++) emit(lmu_word(b, w));
  endtask

  task automatic mmu(input int idx, input mmu_op_e p0, input int src, input int dst,
                     input int bi, input int bk, input int bj);
    mmu_body_t b;
    b = '0; b.ping_op = p0; b.pong_op = MMU_NOP; b.src_lmu = 8'(src); b.des_lmu = 8'(dst);
    b.bound_i = 8'(bi); b.bound_k = 8'(bk); b.bound_j = 8'(bj);
    hdr(OP_MMU, MMU(idx), MMU_BODY_WORDS);
    for (int w = 0; w < MMU_BODY_WORDS; w++) emit(mmu_word(b, w));
  endtask

  task automatic sfu(input int op, input int src, input int srcn, input int dst, input int dstn,
                     input int rows, input int n);
    sfu_body_t b;
    b = '0; b.src_lmu = 8'(src); b.src_num = 8'(srcn); b.des_lmu = 8'(dst); b.des_num = 8'(dstn);
    b.count = 16'(rows); b.ele_num = 16'(n);
    hdr(op, SFU(0), SFU_BODY_WORDS);
    for (int w = 0; w < SFU_BODY_WORDS; w++) emit(sfu_word(b, w));
  endtask

  // weight tile of step t for MMU m: DRAM address of its element (0,0) and row pitch
  function automatic int w_addr(input int t, input int m);
    if (t < 24) return W1_AD + (t % 6)*128*F + (m + 6*(t / 6))*128;
    return W2_AD + (t - 24)*128*D + m*128;
  endfunction
  function automatic int w_pitch(input int t); return (t < 24) ? F : D; endfunction

  // STOREs of the column tiles finished at step t, with the LMU loads taking them
  task automatic stores(input int t);
    for (int m = 0; m < 6; m++) begin
      int jb;
      jb = (t < 24) ? m + 6*(t / 6) : m;
      mmu(m, MMU_STORE, 0, (t < 24) ? 8 + jb/12 : 12, T, 128, 128);
    end
    for (int m = 0; m < 6; m++) begin
      int jb;
      jb = (t < 24) ? m + 6*(t / 6) : m;
      if (t < 24) lmu(8 + jb/12, 1, 0, MMU(m), 0, 0, 0, 1536, 0, T, (jb % 12)*128, 128);
      else        lmu(12, 1, 0, MMU(m), 0, 0, 0, D, 0, T, jb*128, 128);
    end
  endtask

  task automatic build();
    for (int u = 0; u < N_UNITS; u++) last_hdr[u] = -1;
    // LayerNorm of X
    miu(OP_MIU_LOAD, X_AD, D, 0, T, 0, D, 0);
    lmu(0, 1, 0, MIU, 0, 0, 0, D, 0, T, 0, D);
    lmu(0, 0, 0, 0, 1, 0, SFU(0), D, 0, T, 0, D);
    sfu(OP_SFU_LAYERNORM, 0, 1, 1, 1, T, D);
    lmu(1, 1, 0, SFU(0), 0, 0, 0, D, 0, T, 0, D);
    // 48 steps: 24 of FFN1, 24 of FFN2
    for (int t = 0; t < 48; t++) begin
      // (a) weight LMUs: load tile t, send tile t-1
      for (int m = 0; m < 6; m++)
        lmu(2 + m, 1, t % 2, MIU, t > 0, (t + 1) % 2, MMU(m), 128, 0, 128, 0, 128);
      // (b) the MIU fetches tile t for every MMU
      for (int m = 0; m < 6; m++) miu(OP_MIU_LOAD, w_addr(t, m), w_pitch(t), 0, 128, 0, 128, 2 + m);
      // (c) column tiles finished at the previous step go out
      if (t == 6 || t == 12 || t == 18 || t == 24) stores(t - 1);
      if (t == 24) begin
        // GeLU over rows of 3072 gathered from LMU8+LMU9, split over LMU10+LMU11
        sfu(OP_SFU_GELU, 8, 2, 10, 2, T, F);
        lmu(8, 0, 0, 0, 1, 0, SFU(0), 1536, 0, T, 0, 1536);
        lmu(9, 0, 0, 0, 1, 0, SFU(0), 1536, 0, T, 0, 1536);
        lmu(10, 1, 0, SFU(0), 0, 0, 0, 1536, 0, T, 0, 1536);
        lmu(11, 1, 0, SFU(0), 0, 0, 0, 1536, 0, T, 0, 1536);
      end
      // (d) left operand tile: LN(X) for FFN1, GeLU output for FFN2
      for (int m = 0; m < 6; m++) mmu(m, MMU_LOAD_LHS, (t < 24) ? 1 : 10 + (t - 24)/12, 0, T, 128, 128);
      for (int m = 0; m < 6; m++)
        if (t < 24) lmu(1, 0, 0, 0, 1, 0, MMU(m), D, 0, T, (t % 6)*128, 128);
        else        lmu(10 + (t - 24)/12, 0, 0, 0, 1, 0, MMU(m), 1536, 0, T, ((t - 24) % 12)*128, 128);
      // (e) weight tile and compute
      for (int m = 0; m < 6; m++) mmu(m, MMU_LOAD_RHS, 2 + m, 0, T, 128, 128);
      for (int m = 0; m < 6; m++) mmu(m, MMU_COMPUTE, 0, 0, T, 128, 128);
    end
    for (int m = 0; m < 6; m++) lmu(2 + m, 0, 0, 0, 1, 1, MMU(m), 128, 0, 128, 0, 128);
    stores(47);
    lmu(12, 0, 0, 0, 1, 0, MIU, D, 0, T, 0, D);
    miu(OP_MIU_STORE, Y_AD, D, 0, T, 0, D, 12);
    for (int i = 0; i < N_LMU; i++) if (last_hdr[LMU(i)] < 0) lmu(i, 0, 0, 0, 0, 0, 0, 1, 0, 1, 0, 1);
    for (int i = 0; i < N_SFU; i++) if (last_hdr[SFU(i)] < 0) begin
      last_hdr[SFU(i)] = pc; emit(mk_hdr(0, OP_SFU_SOFTMAX, SFU(i), SFU_BODY_WORDS)); emit(0); emit(0);
    end
    for (int u = 0; u < N_UNITS; u++) imem[last_hdr[u]][31] = 1'b1;
  endtask

  // ---------------- mechanism counters ----------------
  int n_switch = 0, n_wlmu_overlap = 0;
  logic [3:0] prev_fn = OP_SFU_LAYERNORM;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_sfu[0].u_sfu.rx_valid && dut.g_sfu[0].u_sfu.rx_ready) begin
      if (dut.g_sfu[0].u_sfu.rx_hdr.op_type != prev_fn) n_switch++;
      prev_fn <= dut.g_sfu[0].u_sfu.rx_hdr.op_type;
    end
    if (dut.g_lmu[2].u_lmu.i_valid && dut.g_lmu[2].u_lmu.i_ready &&
        dut.g_lmu[2].u_lmu.o_valid && dut.g_lmu[2].u_lmu.o_ready) n_wlmu_overlap++;
  end

  task automatic mech(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", name); end
    else $display("  %-34s %0d", name, n);
  endtask

  real X [T][D], W1 [D][F], W2 [F][D], L [T][D], G [T][F];

  initial begin
    int cyc, bad;
    real e, g, mean, v, h, z, maxerr;
    for (int i = 0; i < T; i++) for (int c = 0; c < D; c++) begin
      X[i][c] = (real'($urandom_range(0, 256)) - 128.0) / 64.0; u_dram.mem[X_AD + i*D + c] = r2q(X[i][c]);
    end
    for (int k = 0; k < D; k++) for (int j = 0; j < F; j++) begin
      W1[k][j] = (real'($urandom_range(0, 64)) - 32.0) / 1024.0; u_dram.mem[W1_AD + k*F + j] = r2q(W1[k][j]);
    end
    for (int k = 0; k < F; k++) for (int j = 0; j < D; j++) begin
      W2[k][j] = (real'($urandom_range(0, 64)) - 32.0) / 256.0; u_dram.mem[W2_AD + k*D + j] = r2q(W2[k][j]);
    end
    build();
    prog_len = 32'(pc);
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    @(posedge clk);
    while (!done) begin @(posedge clk); cyc++; end
    $display("BERT-32 FFN: %0d instruction words, done after %0d cycles", pc, cyc);
    for (int i = 0; i < T; i++) begin
      mean = 0; v = 0;
      for (int c = 0; c < D; c++) mean += X[i][c] / D;
      for (int c = 0; c < D; c++) v += (X[i][c] - mean) * (X[i][c] - mean) / D;
      for (int c = 0; c < D; c++) L[i][c] = (X[i][c] - mean) / $sqrt(v + 1.0/65536.0);
      for (int j = 0; j < F; j++) begin
        h = 0;
        for (int k = 0; k < D; k++) h += L[i][k] * W1[k][j];
        z = 1.702 * h;
        G[i][j] = h / (1.0 + $exp(-z));
      end
    end
    bad = 0; maxerr = 0;
    for (int i = 0; i < T; i++) for (int j = 0; j < D; j++) begin
      e = 0;
      for (int k = 0; k < F; k++) e += G[i][k] * W2[k][j];
      g = q2r(u_dram.mem[Y_AD + i*D + j]);
      if (g - e > maxerr) maxerr = g - e;
      if (e - g > maxerr) maxerr = e - g;
      checks++;
      h = 0.06 + 0.02 * ((e < 0) ? -e : e);
      if (g - e > h || e - g > h) begin
        failures++; if (bad++ < 10) $display("FAIL Y[%0d][%0d] = %f, expected %f", i, j, g, e);
      end
    end
    $display("largest error of Y: %f", maxerr);
    $display("Mechanisms:");
    mech("SFU0 LayerNorm -> GeLU switch", n_switch);
    mech("weight LMU load + send same cycle", n_wlmu_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
