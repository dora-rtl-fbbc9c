// tb_dora_deit_attention -- one attention head of a DeiT-Base encoder on the
// full default overlay: 197 tokens (196 image patches plus the class token)
// and a head width of 64. It computes P = softmax(Q K^T) and O = P V, with the
// 1/sqrt(64) scaling taken as already folded into Q. The point of this test is
// that 197 is not a multiple of the 128-word MMU tile: the edge tiles run
// with bound_i, bound_j or bound_k of 69 instead of being padded, and the
// Softmax rows are 197 words long.
//
// Mapping (this testbench's choice; the tiling is left to the compiler):
//   LMU0/1/2  Q (197x64), K^T (64x197), V (197x64), loaded from DRAM
//   MMU0..3   Q K^T: MMU m computes the score tile of row block m/2 and
//             column block m%2 (128 or 69 each way, K = 64)
//   LMU3      the 197x197 scores, built from the four tile stores
//   SFU0      Softmax, 197 rows of 197, into LMU4
//   MIU       stores P from LMU4
//   MMU4/5    P V: MMU4 rows 0..127, MMU5 rows 128..196, K in two steps of
//             128 and 69 that accumulate
//   LMU5      O, then stored to DRAM
// The instruction list is generated in time order; each unit's last
// instruction gets is_last and units without work get a no-op.
//
// Operands are multiples of 1/64 in [-0.5, 0.5], so Q K^T is exact in Q16.16.
// Checks: every word of P against softmax of the exact product (absolute
// 0.0005 plus 1 %), every word of O against P (as stored) x V (0.01), the
// number of compute cycles of an edge MMU (exactly i*k*j summed over its
// tiles, so no padding) and that an edge tile ran at all. About 3 million
// cycles.
module tb_dora_deit_attention;
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

  dram_model #(.DEPTH(1 << 17), .MAX_LAT(0)) u_dram (
    .clk, .rd_valid(dram_rd_valid && rst_n), .rd_ready(dram_rd_ready), .rd_addr(dram_rd_addr),
    .rvalid(dram_rvalid), .rdata(dram_rdata),
    .wr_valid(dram_wr_valid && rst_n), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data));

  // ---------------- instruction memory and program builder ----------------
  logic [31:0] imem [4096];
  int pc = 0;
  int last_hdr [N_UNITS];
  always @(posedge clk) begin
    imem_rvalid <= imem_req_valid && imem_req_ready;
    imem_rdata  <= imem[imem_req_addr % 4096];
  end

  localparam int MIU = 0;
  function automatic int LMU(input int i); return 1 + i; endfunction
  function automatic int MMU(input int i); return 1 + N_LMU + i; endfunction
  function automatic int SFU(input int i); return 1 + N_LMU + N_MMU + i; endfunction

  task automatic emit(input logic [31:0] w); imem[pc] = w; pc++; endtask
  task automatic hdr(input int op, input int unit, input int len);
    last_hdr[unit] = pc;
    emit(mk_hdr(0, op, unit, len));
  endtask

  task automatic miu(input int op, input int ad, input int n,
                     input int sr, input int er, input int sc, input int ec,
                     input int lmu, input int layer, input bit ldone, input bit dv, input int dep);
    miu_body_t b;
    b = '0; b.ddr_addr = 32'(ad); b.m = 16'(er + 1); b.n = 16'(n);
    b.start_row = 16'(sr); b.end_row = 16'(er); b.start_col = 16'(sc); b.end_col = 16'(ec);
    b.src_lmu = 8'(lmu); b.des_lmu = 8'(lmu); b.layer_id = 8'(layer); b.layer_done = ldone;
    b.dep0_v = dv; b.dep0 = 8'(dep);
    hdr(op, MIU, MIU_BODY_WORDS);
    for (int w = 0; w < MIU_BODY_WORDS; w++) emit(miu_word(b, w));
  endtask

  task automatic lmu(input int idx, input bit ld, input bit ldbank, input int src,
                     input bit sd, input bit sdbank, input int dst, input int rl,
                     input int sr, input int er, input int sc, input int ec);
    lmu_body_t b;
    b = '0; b.load_op = ld; b.ping_buf = ldbank; b.src_pu = 8'(src);
    b.send_op = sd; b.pong_buf = sdbank; b.des_pu = 8'(dst); b.count = 16'd1; b.row_len = 16'(rl);
    b.start_row = 16'(sr); b.end_row = 16'(er); b.start_col = 16'(sc); b.end_col = 16'(ec);
    hdr(OP_LMU, LMU(idx), LMU_BODY_WORDS);
    for (int w = 0; w < LMU_BODY_WORDS; w++) emit(lmu_word(b, w));
  endtask
  task automatic lmu_send(input int idx, input int dst, input int rl,
                          input int sr, input int nr, input int sc, input int nc);
    lmu(idx, 0, 0, 0, 1, 0, dst, rl, sr, sr + nr - 1, sc, sc + nc - 1);
  endtask
  task automatic lmu_load(input int idx, input int src, input int rl,
                          input int sr, input int nr, input int sc, input int nc);
    lmu(idx, 1, 0, src, 0, 0, 0, rl, sr, sr + nr - 1, sc, sc + nc - 1);
  endtask

  task automatic mmu(input int idx, input mmu_op_e p0, input mmu_op_e p1,
                     input int src, input int dst, input int bi, input int bk, input int bj);
    mmu_body_t b;
    b = '0; b.ping_op = p0; b.pong_op = p1; b.src_lmu = 8'(src); b.des_lmu = 8'(dst);
    b.bound_i = 8'(bi); b.bound_k = 8'(bk); b.bound_j = 8'(bj);
    hdr(OP_MMU, MMU(idx), MMU_BODY_WORDS);
    for (int w = 0; w < MMU_BODY_WORDS; w++) emit(mmu_word(b, w));
  endtask

  localparam int T = 197, D = 64;
  localparam int Q_AD = 0, K_AD = 16384, V_AD = 32768, P_AD = 49152, O_AD = 98304;

  function automatic int blk(input int b); return (b == 0) ? 128 : T - 128; endfunction

  task automatic build();
    for (int u = 0; u < N_UNITS; u++) last_hdr[u] = -1;
    // ---- operands (layer 1) ----
    miu(OP_MIU_LOAD, Q_AD, D, 0, T-1, 0, D-1, 0, 1, 0, 0, 0);
    lmu_load(0, MIU, D, 0, T, 0, D);
    miu(OP_MIU_LOAD, K_AD, T, 0, D-1, 0, T-1, 1, 1, 0, 0, 0);
    lmu_load(1, MIU, T, 0, D, 0, T);
    miu(OP_MIU_LOAD, V_AD, D, 0, T-1, 0, D-1, 2, 1, 0, 0, 0);
    lmu_load(2, MIU, D, 0, T, 0, D);
    // ---- scores: MMU m takes row block m/2, column block m%2 ----
    for (int m = 0; m < 4; m++) mmu(m, MMU_LOAD_LHS, MMU_NOP, 0, 0, blk(m/2), D, blk(m%2));
    for (int m = 0; m < 4; m++) lmu_send(0, MMU(m), D, (m/2)*128, blk(m/2), 0, D);
    for (int m = 0; m < 4; m++) mmu(m, MMU_LOAD_RHS, MMU_NOP, 1, 0, blk(m/2), D, blk(m%2));
    for (int m = 0; m < 4; m++) lmu_send(1, MMU(m), T, 0, D, (m%2)*128, blk(m%2));
    for (int m = 0; m < 4; m++) mmu(m, MMU_COMPUTE, MMU_NOP, 0, 0, blk(m/2), D, blk(m%2));
    for (int m = 0; m < 4; m++) mmu(m, MMU_STORE, MMU_NOP, 0, 3, blk(m/2), D, blk(m%2));
    for (int m = 0; m < 4; m++) lmu_load(3, MMU(m), T, (m/2)*128, blk(m/2), (m%2)*128, blk(m%2));
    // ---- Softmax over rows of 197 ----
    begin
      sfu_body_t b;
      b = '0; b.src_lmu = 3; b.src_num = 1; b.des_lmu = 4; b.des_num = 1; b.count = 16'(T); b.ele_num = 16'(T);
      hdr(OP_SFU_SOFTMAX, SFU(0), SFU_BODY_WORDS);
      for (int w = 0; w < SFU_BODY_WORDS; w++) emit(sfu_word(b, w));
    end
    lmu_send(3, SFU(0), T, 0, T, 0, T);
    lmu_load(4, SFU(0), T, 0, T, 0, T);
    lmu_send(4, MIU, T, 0, T, 0, T);
    miu(OP_MIU_STORE, P_AD, T, 0, T-1, 0, T-1, 4, 1, 0, 0, 0);
    // ---- O = P V on MMU4 (rows 0..127) and MMU5 (rows 128..196) ----
    for (int kb = 0; kb < 2; kb++) begin
      for (int r = 0; r < 2; r++) mmu(4 + r, MMU_LOAD_LHS, MMU_NOP, 4, 0, blk(r), blk(kb), D);
      for (int r = 0; r < 2; r++) lmu_send(4, MMU(4 + r), T, r*128, blk(r), kb*128, blk(kb));
      for (int r = 0; r < 2; r++) mmu(4 + r, MMU_LOAD_RHS, MMU_NOP, 2, 0, blk(r), blk(kb), D);
      for (int r = 0; r < 2; r++) lmu_send(2, MMU(4 + r), D, kb*128, blk(kb), 0, D);
      for (int r = 0; r < 2; r++) mmu(4 + r, MMU_COMPUTE, MMU_NOP, 0, 0, blk(r), blk(kb), D);
    end
    for (int r = 0; r < 2; r++) mmu(4 + r, MMU_STORE, MMU_NOP, 0, 5, blk(r), blk(1), D);
    for (int r = 0; r < 2; r++) lmu_load(5, MMU(4 + r), D, r*128, blk(r), 0, D);
    lmu_send(5, MIU, D, 0, T, 0, D);
    miu(OP_MIU_STORE, O_AD, D, 0, T-1, 0, D-1, 5, 1, 1, 0, 0);
    // ---- units without work get a no-op; every unit's last instruction ends it ----
    for (int i = 0; i < N_LMU; i++) if (last_hdr[LMU(i)] < 0) lmu(i, 0, 0, 0, 0, 0, 0, 1, 0, 0, 0, 0);
    for (int i = 0; i < N_MMU; i++) if (last_hdr[MMU(i)] < 0) mmu(i, MMU_NOP, MMU_NOP, 0, 0, 1, 1, 1);
    for (int i = 0; i < N_SFU; i++) if (last_hdr[SFU(i)] < 0) begin
      hdr(OP_SFU_SOFTMAX, SFU(i), SFU_BODY_WORDS);
      for (int w = 0; w < SFU_BODY_WORDS; w++) emit(32'd0);
    end
    for (int u = 0; u < N_UNITS; u++) imem[last_hdr[u]][31] = 1'b1;
  endtask

  // ---------------- compute-cycle counters ----------------
  int n_mac3 = 0, n_mac5 = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_mmu[3].u_mmu.g_bank[0].mac) n_mac3++;
    if (dut.g_mmu[5].u_mmu.g_bank[0].mac) n_mac5++;
  end

  task automatic expect_eq(input string name, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s = %0d, expected %0d", name, got, exp); end
    else $display("  %-40s %0d", name, got);
  endtask

  real Q [T][D], K [D][T], V [T][D];

  initial begin
    int cyc, bad;
    real e, mx, sum, g, row [T];
    for (int i = 0; i < T; i++) for (int k = 0; k < D; k++) begin
      Q[i][k] = (real'($urandom_range(0, 64)) - 32.0) / 64.0; u_dram.mem[Q_AD + i*D + k] = r2q(Q[i][k]);
      V[i][k] = (real'($urandom_range(0, 64)) - 32.0) / 64.0; u_dram.mem[V_AD + i*D + k] = r2q(V[i][k]);
    end
    for (int k = 0; k < D; k++) for (int j = 0; j < T; j++) begin
      K[k][j] = (real'($urandom_range(0, 64)) - 32.0) / 64.0; u_dram.mem[K_AD + k*T + j] = r2q(K[k][j]);
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
    $display("DeiT attention head: %0d instruction words, done after %0d cycles", pc, cyc);
    // P = softmax(Q K^T), row by row
    bad = 0;
    for (int i = 0; i < T; i++) begin
      mx = -1e9; sum = 0;
      for (int j = 0; j < T; j++) begin
        row[j] = 0;
        for (int k = 0; k < D; k++) row[j] += Q[i][k] * K[k][j];
        if (row[j] > mx) mx = row[j];
      end
      for (int j = 0; j < T; j++) begin row[j] = $exp(row[j] - mx); sum += row[j]; end
      for (int j = 0; j < T; j++) begin
        e = row[j] / sum; g = q2r(u_dram.mem[P_AD + i*T + j]);
        checks++;
        if (g - e > 0.0005 + 0.01*e || e - g > 0.0005 + 0.01*e) begin
          failures++; if (bad++ < 10) $display("FAIL P[%0d][%0d] = %f, expected %f", i, j, g, e);
        end
      end
    end
    // O = P V with P as stored
    for (int i = 0; i < T; i++) for (int j = 0; j < D; j++) begin
      e = 0;
      for (int k = 0; k < T; k++) e += q2r(u_dram.mem[P_AD + i*T + k]) * V[k][j];
      g = q2r(u_dram.mem[O_AD + i*D + j]);
      checks++;
      if (g - e > 0.01 || e - g > 0.01) begin
        failures++; if (bad++ < 20) $display("FAIL O[%0d][%0d] = %f, expected %f", i, j, g, e);
      end
    end
    $display("Edge tiles (compute cycles = i*k*j, no padding):");
    expect_eq("MMU3 compute cycles, 69x64x69 tile", n_mac3, 69*64*69);
    expect_eq("MMU5 compute cycles, 69x128x64 + 69x69x64", n_mac5, 69*128*64 + 69*69*64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
