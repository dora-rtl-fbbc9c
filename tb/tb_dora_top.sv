// tb_dora_top -- end-to-end run of the full-size overlay (14 LMUs, 6 MMUs,
// 3 SFUs, default buffer sizes) on a two-layer workload shaped like the
// paper's case study: layer 1 = MM1 followed by Softmax, layer 2 = MM2 that
// reads layer 1's result back from DRAM.
//
//   S = softmax_rows(A x B)     A 8x12, B 12x16   (MMU0 and MMU2 each take
//                                                 4 rows of A; SFU0)
//   R = S x C                   C 16x4            (MMU1, ping bank on C's
//                                                 columns 0..1 while the pong
//                                                 bank loads columns 2..3)
//   G = GeLU(LayerNorm_rows(R))                   (layer 3: SFU0 again,
//                                                 switching function)
//
// The testbench is the host: it writes the instruction program and the
// operands into behavioural instruction memory and DRAM, starts the IDU and
// waits for done. It checks S and R in DRAM against real-number math and
// counts how often each mechanism occurred; one that never occurred is a
// failure: the Sync Unit holding the dependent load (RAW on DRAM), an MMU
// stalled on an empty operand stream (back-pressure), an LMU loading one bank
// while sending the other, an MMU computing on ping while loading pong, two
// MMUs working on one matrix product at the same time, an LMU tile built by
// two loads, the SFU's Softmax mode, SFU0 switching between Softmax, LayerNorm and
// GeLU, and the IDU waiting for a busy unit.
module tb_dora_top;
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

  dram_model #(.DEPTH(1 << 13)) u_dram (
    .clk, .rd_valid(dram_rd_valid && rst_n), .rd_ready(dram_rd_ready), .rd_addr(dram_rd_addr),
    .rvalid(dram_rvalid), .rdata(dram_rdata),
    .wr_valid(dram_wr_valid && rst_n), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data));

  // ---------------- instruction memory ----------------
  logic [31:0] imem [2048];
  int pc = 0;
  always @(posedge clk) begin
    imem_rvalid <= imem_req_valid && imem_req_ready;
    imem_rdata  <= imem[imem_req_addr % 2048];
  end

  localparam int MIU = 0;
  function automatic int LMU(input int i); return 1 + i; endfunction
  function automatic int MMU(input int i); return 1 + N_LMU + i; endfunction
  function automatic int SFU(input int i); return 1 + N_LMU + N_MMU + i; endfunction

  localparam int A_AD = 0, B_AD = 256, S_AD = 1024, C_AD = 2048, R_AD = 3072, G_AD = 3584;

  task automatic emit(input logic [31:0] w); imem[pc] = w; pc++; endtask

  task automatic miu(input bit last, input int op, input int ad, input int n,
                     input int sr, input int er, input int sc, input int ec,
                     input int lmu, input int layer, input bit ldone, input bit dv, input int dep);
    miu_body_t b;
    b = '0; b.ddr_addr = 32'(ad); b.m = 16'(er + 1); b.n = 16'(n);
    b.start_row = 16'(sr); b.end_row = 16'(er); b.start_col = 16'(sc); b.end_col = 16'(ec);
    b.src_lmu = 8'(lmu); b.des_lmu = 8'(lmu); b.layer_id = 8'(layer); b.layer_done = ldone;
    b.dep0_v = dv; b.dep0 = 8'(dep);
    emit(mk_hdr(last, op, MIU, MIU_BODY_WORDS));
    for (int w = 0; w < MIU_BODY_WORDS; w++) emit(miu_word(b, w));
  endtask

  task automatic lmu(input bit last, input int idx, input bit ld, input bit ldbank, input int src,
                     input bit sd, input bit sdbank, input int dst, input int cnt, input int rl,
                     input int sr, input int er, input int sc, input int ec);
    lmu_body_t b;
    b = '0; b.load_op = ld; b.ping_buf = ldbank; b.src_pu = 8'(src);
    b.send_op = sd; b.pong_buf = sdbank; b.des_pu = 8'(dst); b.count = 16'(cnt); b.row_len = 16'(rl);
    b.start_row = 16'(sr); b.end_row = 16'(er); b.start_col = 16'(sc); b.end_col = 16'(ec);
    emit(mk_hdr(last, OP_LMU, LMU(idx), LMU_BODY_WORDS));
    for (int w = 0; w < LMU_BODY_WORDS; w++) emit(lmu_word(b, w));
  endtask

  task automatic mmu(input bit last, input int idx, input mmu_op_e p0, input mmu_op_e p1,
                     input int src, input int dst, input int bi, input int bk, input int bj);
    mmu_body_t b;
    b = '0; b.ping_op = p0; b.pong_op = p1; b.src_lmu = 8'(src); b.des_lmu = 8'(dst);
    b.bound_i = 8'(bi); b.bound_k = 8'(bk); b.bound_j = 8'(bj);
    emit(mk_hdr(last, OP_MMU, MMU(idx), MMU_BODY_WORDS));
    for (int w = 0; w < MMU_BODY_WORDS; w++) emit(mmu_word(b, w));
  endtask

  task automatic sfu(input bit last, input int idx, input int op, input int src, input int dst,
                     input int rows, input int n);
    sfu_body_t b;
    b = '0; b.src_lmu = 8'(src); b.des_lmu = 8'(dst); b.count = 16'(rows); b.ele_num = 16'(n);
    emit(mk_hdr(last, op, SFU(idx), SFU_BODY_WORDS));
    for (int w = 0; w < SFU_BODY_WORDS; w++) emit(sfu_word(b, w));
  endtask

  // ---------------- operands and reference ----------------
  real A [8][12], B [12][16], C [16][4], S [8][16], R [8][4];

  task automatic build();
    // idle units finish at once
    lmu(1, 2, 0, 0, 0, 0, 0, 0, 0, 1, 0, 0, 0, 0);
    for (int i = 10; i < N_LMU; i++) lmu(1, i, 0, 0, 0, 0, 0, 0, 0, 1, 0, 0, 0, 0);
    for (int i = 3; i < N_MMU; i++) mmu(1, i, MMU_NOP, MMU_NOP, 0, 0, 1, 1, 1);
    for (int i = 1; i < N_SFU; i++) sfu(1, i, OP_SFU_SOFTMAX, 0, 0, 0, 0);
    // ---- layer 1: S = softmax(A x B) ----
    miu(0, OP_MIU_LOAD, A_AD, 12, 0, 7, 0, 11, 0, 1, 0, 0, 0);
    lmu(0, 0, 1, 0, MIU, 0, 0, 0, 0, 12, 0, 7, 0, 11);
    miu(0, OP_MIU_LOAD, B_AD, 16, 0, 11, 0, 15, 1, 1, 0, 0, 0);
    lmu(0, 1, 1, 0, MIU, 0, 0, 0, 0, 16, 0, 11, 0, 15);
    lmu(0, 0, 0, 0, 0, 1, 0, MMU(0), 1, 12, 0, 3, 0, 11);      // rows 0..3 -> MMU0
    mmu(0, 0, MMU_LOAD_LHS, MMU_NOP, 0, 3, 4, 12, 16);
    mmu(0, 2, MMU_LOAD_LHS, MMU_NOP, 0, 3, 4, 12, 16);
    lmu(1, 0, 0, 0, 0, 1, 0, MMU(2), 1, 12, 4, 7, 0, 11);      // rows 4..7 -> MMU2
    lmu(0, 1, 0, 0, 0, 1, 0, MMU(0), 1, 16, 0, 11, 0, 15);
    mmu(0, 0, MMU_LOAD_RHS, MMU_NOP, 1, 3, 4, 12, 16);
    mmu(0, 2, MMU_LOAD_RHS, MMU_NOP, 1, 3, 4, 12, 16);
    lmu(1, 1, 0, 0, 0, 1, 0, MMU(2), 1, 16, 0, 11, 0, 15);
    mmu(0, 0, MMU_COMPUTE, MMU_NOP, 0, 3, 4, 12, 16);
    mmu(0, 2, MMU_COMPUTE, MMU_NOP, 0, 3, 4, 12, 16);
    mmu(1, 0, MMU_STORE, MMU_NOP, 0, 3, 4, 12, 16);
    lmu(0, 3, 1, 0, MMU(0), 0, 0, 0, 0, 16, 0, 3, 0, 15);      // tile built by two loads
    mmu(1, 2, MMU_STORE, MMU_NOP, 0, 3, 4, 12, 16);
    lmu(0, 3, 1, 0, MMU(2), 0, 0, 0, 0, 16, 4, 7, 0, 15);
    lmu(1, 3, 0, 0, 0, 1, 0, SFU(0), 1, 16, 0, 7, 0, 15);
    sfu(0, 0, OP_SFU_SOFTMAX, 3, 4, 8, 16);
    lmu(0, 4, 1, 0, SFU(0), 0, 0, 0, 0, 16, 0, 7, 0, 15);
    lmu(1, 4, 0, 0, 0, 1, 0, MIU, 1, 16, 0, 7, 0, 15);
    miu(0, OP_MIU_STORE, S_AD, 16, 0, 7, 0, 15, 4, 1, 1, 0, 0);
    // ---- layer 2: R = S x C, S read back from DRAM ----
    miu(0, OP_MIU_LOAD, S_AD, 16, 0, 7, 0, 15, 5, 2, 0, 1, 1);  // waits for layer 1
    lmu(0, 5, 1, 0, MIU, 0, 0, 0, 0, 16, 0, 7, 0, 15);
    lmu(1, 5, 0, 0, 0, 1, 0, MMU(1), 2, 16, 0, 7, 0, 15);      // S twice: ping and pong
    mmu(0, 1, MMU_LOAD_LHS, MMU_NOP, 5, 7, 8, 16, 2);
    miu(0, OP_MIU_LOAD, C_AD, 4, 0, 15, 0, 1, 6, 2, 0, 0, 0);
    lmu(0, 6, 1, 0, MIU, 0, 0, 0, 0, 2, 0, 15, 0, 1);
    miu(0, OP_MIU_LOAD, C_AD, 4, 0, 15, 2, 3, 6, 2, 0, 0, 0);
    lmu(0, 6, 1, 1, MIU, 1, 0, MMU(1), 1, 2, 0, 15, 0, 1);     // load pong while sending ping
    mmu(0, 1, MMU_LOAD_RHS, MMU_NOP, 6, 7, 8, 16, 2);
    mmu(0, 1, MMU_COMPUTE, MMU_LOAD_LHS, 5, 7, 8, 16, 2);
    lmu(1, 6, 0, 0, 0, 1, 1, MMU(1), 1, 2, 0, 15, 0, 1);
    mmu(0, 1, MMU_STORE, MMU_LOAD_RHS, 6, 7, 8, 16, 2);
    lmu(0, 7, 1, 0, MMU(1), 0, 0, 0, 0, 4, 0, 7, 0, 1);
    mmu(0, 1, MMU_NOP, MMU_COMPUTE, 6, 7, 8, 16, 2);
    mmu(1, 1, MMU_NOP, MMU_STORE, 6, 7, 8, 16, 2);
    lmu(0, 7, 1, 0, MMU(1), 0, 0, 0, 0, 4, 0, 7, 2, 3);
    lmu(0, 7, 0, 0, 0, 1, 0, MIU, 1, 4, 0, 7, 0, 3);
    miu(0, OP_MIU_STORE, R_AD, 4, 0, 7, 0, 3, 7, 2, 1, 0, 0);
    // ---- layer 3: G = GeLU(LayerNorm(R)), SFU0 switching functions ----
    lmu(1, 7, 0, 0, 0, 1, 0, SFU(0), 1, 4, 0, 7, 0, 3);
    sfu(0, 0, OP_SFU_LAYERNORM, 7, 8, 8, 4);
    lmu(0, 8, 1, 0, SFU(0), 0, 0, 0, 0, 4, 0, 7, 0, 3);
    lmu(1, 8, 0, 0, 0, 1, 0, SFU(0), 1, 4, 0, 7, 0, 3);
    sfu(1, 0, OP_SFU_GELU, 8, 9, 8, 4);
    lmu(0, 9, 1, 0, SFU(0), 0, 0, 0, 0, 4, 0, 7, 0, 3);
    lmu(1, 9, 0, 0, 0, 1, 0, MIU, 1, 4, 0, 7, 0, 3);
    miu(1, OP_MIU_STORE, G_AD, 4, 0, 7, 0, 3, 9, 3, 1, 0, 0);
  endtask

  // ---------------- mechanism counters ----------------
  int n_sync = 0, n_mmu_stall = 0, n_lmu_overlap = 0, n_pingpong = 0, n_two_mmu = 0;
  int n_idu_wait = 0, n_softmax_rows = 0, n_tile_loads = 0, n_sfu_switch = 0;
  logic [3:0] sfu_prev_fn = OP_SFU_SOFTMAX;
  always @(posedge clk) if (rst_n) begin
    if (sync_stall) n_sync++;
    if (|mmu_in_stall) n_mmu_stall++;
    if (dut.g_lmu[6].u_lmu.ld_act && dut.g_lmu[6].u_lmu.i_valid &&
        dut.g_lmu[6].u_lmu.o_valid && dut.g_lmu[6].u_lmu.o_ready) n_lmu_overlap++;
    if (dut.g_mmu[1].u_mmu.g_bank[0].mac && dut.g_mmu[1].u_mmu.g_bank[1].ld_beat) n_pingpong++;
    if (dut.g_mmu[0].u_mmu.g_bank[0].mac && dut.g_mmu[2].u_mmu.g_bank[0].mac) n_two_mmu++;
    if (dut.u_idu.state == 2'd3 && !dut.u_idu.sel_ready) n_idu_wait++;
    if (dut.g_sfu[0].u_sfu.state == dut.g_sfu[0].u_sfu.S_SEND && dut.g_sfu[0].u_sfu.fn == OP_SFU_SOFTMAX &&
        dut.g_sfu[0].u_sfu.o_ready && dut.g_sfu[0].u_sfu.last_el) n_softmax_rows++;
    if (dut.g_sfu[0].u_sfu.rx_valid && dut.g_sfu[0].u_sfu.rx_ready) begin
      if (dut.g_sfu[0].u_sfu.rx_hdr.op_type != sfu_prev_fn) n_sfu_switch++;
      sfu_prev_fn <= dut.g_sfu[0].u_sfu.rx_hdr.op_type;
    end
    if (dut.g_lmu[3].u_lmu.rx_valid && dut.g_lmu[3].u_lmu.rx_ready && dut.g_lmu[3].u_lmu.nb.load_op) n_tile_loads++;
  end

  task automatic mech(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", name); end
    else $display("  %-34s %0d", name, n);
  endtask

  initial begin
    int cyc;
    real mx, sum, e;
    // operands: multiples of 1/16 in [-1, 1]
    for (int i = 0; i < 8; i++) for (int k = 0; k < 12; k++) begin
      A[i][k] = (real'($urandom_range(0, 32)) - 16.0) / 16.0; u_dram.mem[A_AD + i*12 + k] = r2q(A[i][k]);
    end
    for (int k = 0; k < 12; k++) for (int j = 0; j < 16; j++) begin
      B[k][j] = (real'($urandom_range(0, 32)) - 16.0) / 16.0; u_dram.mem[B_AD + k*16 + j] = r2q(B[k][j]);
    end
    for (int k = 0; k < 16; k++) for (int j = 0; j < 4; j++) begin
      C[k][j] = (real'($urandom_range(0, 32)) - 16.0) / 16.0; u_dram.mem[C_AD + k*4 + j] = r2q(C[k][j]);
    end
    for (int a = 0; a < 128; a++) u_dram.mem[S_AD + a] = 32'h7fff_0000;   // stale data
    for (int i = 0; i < 8; i++) begin
      mx = -1e9; sum = 0;
      for (int j = 0; j < 16; j++) begin
        S[i][j] = 0;
        for (int k = 0; k < 12; k++) S[i][j] += A[i][k] * B[k][j];
        if (S[i][j] > mx) mx = S[i][j];
      end
      for (int j = 0; j < 16; j++) begin S[i][j] = $exp(S[i][j] - mx); sum += S[i][j]; end
      for (int j = 0; j < 16; j++) S[i][j] /= sum;
    end
    for (int i = 0; i < 8; i++) for (int j = 0; j < 4; j++) begin
      R[i][j] = 0;
      for (int k = 0; k < 16; k++) R[i][j] += S[i][k] * C[k][j];
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
    $display("DORA top: %0d instruction words, done after %0d cycles", pc, cyc);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 16; j++) begin
      e = q2r(u_dram.mem[S_AD + i*16 + j]);
      checks++;
      if (e - S[i][j] > 0.005 || S[i][j] - e > 0.005) begin
        failures++; $display("FAIL S[%0d][%0d] = %f, expected %f", i, j, e, S[i][j]);
      end
    end
    for (int i = 0; i < 8; i++) for (int j = 0; j < 4; j++) begin
      e = q2r(u_dram.mem[R_AD + i*4 + j]);
      checks++;
      if (e - R[i][j] > 0.01 || R[i][j] - e > 0.01) begin
        failures++; $display("FAIL R[%0d][%0d] = %f, expected %f", i, j, e, R[i][j]);
      end
    end
    // layer 3 reference from the R the design produced
    for (int i = 0; i < 8; i++) begin
      real x [4], mean, v, y, t;
      mean = 0; v = 0;
      for (int j = 0; j < 4; j++) begin x[j] = q2r(u_dram.mem[R_AD + i*4 + j]); mean += x[j] / 4.0; end
      for (int j = 0; j < 4; j++) v += (x[j] - mean) * (x[j] - mean) / 4.0;
      for (int j = 0; j < 4; j++) begin
        y = (x[j] - mean) / $sqrt(v + 1.0/65536.0);
        t = $tanh(0.7978845608 * (y + 0.044715 * y*y*y));
        y = 0.5 * y * (1.0 + t);
        e = q2r(u_dram.mem[G_AD + i*4 + j]);
        checks++;
        if (e - y > 0.04 || y - e > 0.04) begin
          failures++; $display("FAIL G[%0d][%0d] = %f, expected %f", i, j, e, y);
        end
      end
    end
    $display("Mechanisms:");
    mech("sync unit holds dependent load", n_sync);
    mech("MMU stalled on empty stream", n_mmu_stall);
    mech("LMU load + send same cycle", n_lmu_overlap);
    mech("MMU ping compute + pong load", n_pingpong);
    mech("two MMUs on one product", n_two_mmu);
    mech("IDU waits for busy unit", n_idu_wait);
    mech("softmax rows", n_softmax_rows);
    mech("SFU0 function switches", n_sfu_switch);
    checks++;
    if (n_tile_loads != 2) begin failures++; $display("FAIL LMU3 tile loads %0d", n_tile_loads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
