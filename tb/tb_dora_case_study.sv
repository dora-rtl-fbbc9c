// tb_dora_case_study -- the paper's three-kernel example at its full size on
// the full default overlay: MM1 (256x256 by 256x512), a row-wise Softmax over
// the 256x512 result, and MM2 (256x512 by 512x64), with the Softmax result
// written to DRAM and read back by MM2 (a read-after-write dependence the
// Sync Unit must hold).
//
// Mapping (this testbench's choice; the paper leaves the tiling to its
// compiler):
//   LMU0      A, 256x256, one full bank
//   LMU1/2    B columns 0..255 / 256..511
//   MMU0..3   MM1: MMU m computes output columns m*128..m*128+127, rows 0..127
//             in its ping bank and rows 128..255 in its pong bank, K in two
//             steps of 128 (so one bank computes while the other loads)
//   LMU3/4    MM1 result columns 0..255 / 256..511, each built from the
//             stores of two MMUs
//   SFU0      Softmax rows of 512, each gathered from LMU3 and LMU4 and split
//             back over LMU5 and LMU6
//   MIU       stores S from LMU5/LMU6 (layer 1), reloads it into LMU7/LMU8
//             (layer 2, waits for layer 1), loads C (512x64) into LMU9
//   MMU0..3   MM2: MMU m computes rows m*64..m*64+63 of R, K in four steps
//   LMU10     R, then stored to DRAM
// The instruction list is generated in time order; each unit's last
// instruction gets is_last and units without work get a no-op.
//
// Operands are multiples of 1/64 in [-0.5, 0.5], so MM1 is exact in Q16.16.
// Checks: every word of S against softmax of the exact product (absolute
// 0.0005 plus 1 %), every word of R against S (as stored) x C (0.01), and
// that the Sync Unit held the dependent load, MMU ping/pong overlapped and
// the SFU gathered rows from two LMUs. Runs about 11 million cycles.
module tb_dora_case_study;
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

  dram_model #(.DEPTH(1 << 19), .MAX_LAT(0)) u_dram (
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

  localparam int A_AD = 0, B_AD = 65536, S_AD = 196608, C_AD = 327680, R_AD = 360448;

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

  task automatic build();
    for (int u = 0; u < N_UNITS; u++) last_hdr[u] = -1;
    // ---- layer 1 operands ----
    miu(OP_MIU_LOAD, A_AD, 256, 0, 255, 0, 255, 0, 1, 0, 0, 0);
    lmu_load(0, MIU, 256, 0, 256, 0, 256);
    miu(OP_MIU_LOAD, B_AD, 512, 0, 255, 0, 255, 1, 1, 0, 0, 0);
    lmu_load(1, MIU, 256, 0, 256, 0, 256);
    miu(OP_MIU_LOAD, B_AD, 512, 0, 255, 256, 511, 2, 1, 0, 0, 0);
    lmu_load(2, MIU, 256, 0, 256, 0, 256);
    // ---- MM1 on MMU0..3, ten steps each, emitted step by step ----
    for (int s = 0; s < 10; s++) begin
      int kb, ib;
      kb = (s < 4) ? 0 : 1;
      for (int m = 0; m < 4; m++)
        case (s)
          0, 4: mmu(m, MMU_LOAD_LHS, (s == 4) ? MMU_COMPUTE : MMU_NOP, 0, 0, 128, 128, 128);
          1, 5: mmu(m, MMU_LOAD_RHS, MMU_NOP, 1 + m/2, 0, 128, 128, 128);
          2, 6: mmu(m, MMU_COMPUTE, MMU_LOAD_LHS, 0, 0, 128, 128, 128);
          3, 7: mmu(m, MMU_NOP, MMU_LOAD_RHS, 1 + m/2, 0, 128, 128, 128);
          8:    mmu(m, MMU_STORE, MMU_COMPUTE, 0, 3 + m/2, 128, 128, 128);
          default: mmu(m, MMU_NOP, MMU_STORE, 0, 3 + m/2, 128, 128, 128);
        endcase
      // tiles the MMUs take in this step
      ib = (s == 2 || s == 3 || s == 6 || s == 7) ? 1 : 0;
      for (int m = 0; m < 4; m++)
        case (s)
          0, 2, 4, 6: lmu_send(0, MMU(m), 256, ib*128, 128, kb*128, 128);              // A tile
          1, 3, 5, 7: lmu_send(1 + m/2, MMU(m), 256, kb*128, 128, (m%2)*128, 128);     // B tile
          8:          lmu_load(3 + m/2, MMU(m), 256, 0, 128, (m%2)*128, 128);          // OUT rows 0..127
          default:    lmu_load(3 + m/2, MMU(m), 256, 128, 128, (m%2)*128, 128);        // OUT rows 128..255
        endcase
    end
    // ---- Softmax: rows gathered from LMU3+LMU4, results split over LMU5+LMU6 ----
    begin
      sfu_body_t b;
      b = '0; b.src_lmu = 3; b.src_num = 2; b.des_lmu = 5; b.des_num = 2; b.count = 256; b.ele_num = 512;
      hdr(OP_SFU_SOFTMAX, SFU(0), SFU_BODY_WORDS);
      for (int w = 0; w < SFU_BODY_WORDS; w++) emit(sfu_word(b, w));
    end
    lmu_send(3, SFU(0), 256, 0, 256, 0, 256);
    lmu_send(4, SFU(0), 256, 0, 256, 0, 256);
    lmu_load(5, SFU(0), 256, 0, 256, 0, 256);
    lmu_load(6, SFU(0), 256, 0, 256, 0, 256);
    lmu_send(5, MIU, 256, 0, 256, 0, 256);
    lmu_send(6, MIU, 256, 0, 256, 0, 256);
    miu(OP_MIU_STORE, S_AD, 512, 0, 255, 0, 255, 5, 1, 0, 0, 0);
    miu(OP_MIU_STORE, S_AD, 512, 0, 255, 256, 511, 6, 1, 1, 0, 0);
    // ---- layer 2: reload S (waits for layer 1), load C ----
    miu(OP_MIU_LOAD, S_AD, 512, 0, 255, 0, 255, 7, 2, 0, 1, 1);
    lmu_load(7, MIU, 256, 0, 256, 0, 256);
    miu(OP_MIU_LOAD, S_AD, 512, 0, 255, 256, 511, 8, 2, 0, 1, 1);
    lmu_load(8, MIU, 256, 0, 256, 0, 256);
    miu(OP_MIU_LOAD, C_AD, 64, 0, 511, 0, 63, 9, 2, 0, 0, 0);
    lmu_load(9, MIU, 64, 0, 512, 0, 64);
    // ---- MM2 on MMU0..3: rows m*64.., K in four steps of 128 ----
    for (int kb = 0; kb < 4; kb++) begin
      for (int m = 0; m < 4; m++) mmu(m, MMU_LOAD_LHS, MMU_NOP, 7 + kb/2, 0, 64, 128, 64);
      for (int m = 0; m < 4; m++) lmu_send(7 + kb/2, MMU(m), 256, m*64, 64, (kb%2)*128, 128);
      for (int m = 0; m < 4; m++) mmu(m, MMU_LOAD_RHS, MMU_NOP, 9, 0, 64, 128, 64);
      for (int m = 0; m < 4; m++) lmu_send(9, MMU(m), 64, kb*128, 128, 0, 64);
      for (int m = 0; m < 4; m++) mmu(m, MMU_COMPUTE, MMU_NOP, 0, 0, 64, 128, 64);
    end
    for (int m = 0; m < 4; m++) mmu(m, MMU_STORE, MMU_NOP, 0, 10, 64, 128, 64);
    for (int m = 0; m < 4; m++) lmu_load(10, MMU(m), 64, m*64, 64, 0, 64);
    lmu_send(10, MIU, 64, 0, 256, 0, 64);
    miu(OP_MIU_STORE, R_AD, 64, 0, 255, 0, 63, 10, 2, 1, 0, 0);
    // ---- units without work get a no-op; every unit's last instruction ends it ----
    for (int i = 0; i < N_LMU; i++) if (last_hdr[LMU(i)] < 0) lmu(i, 0, 0, 0, 0, 0, 0, 1, 0, 0, 0, 0);
    for (int i = 0; i < N_MMU; i++) if (last_hdr[MMU(i)] < 0) mmu(i, MMU_NOP, MMU_NOP, 0, 0, 1, 1, 1);
    for (int i = 0; i < N_SFU; i++) if (last_hdr[SFU(i)] < 0) begin
      hdr(OP_SFU_SOFTMAX, SFU(i), SFU_BODY_WORDS);
      for (int w = 0; w < SFU_BODY_WORDS; w++) emit(32'd0);
    end
    for (int u = 0; u < N_UNITS; u++) imem[last_hdr[u]][31] = 1'b1;
  endtask

  // ---------------- mechanism counters ----------------
  int n_sync = 0, n_pingpong = 0, n_gather = 0;
  logic [7:0] sfu_prev_src = '0;
  always @(posedge clk) if (rst_n) begin
    if (sync_stall) n_sync++;
    if (dut.g_mmu[0].u_mmu.g_bank[0].mac && dut.g_mmu[0].u_mmu.g_bank[1].ld_beat) n_pingpong++;
    if (dut.g_sfu[0].u_sfu.i_valid && dut.g_sfu[0].u_sfu.i_ready) begin
      if (dut.g_sfu[0].u_sfu.i_src != sfu_prev_src) n_gather++;
      sfu_prev_src <= dut.g_sfu[0].u_sfu.i_src;
    end
  end

  task automatic mech(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", name); end
    else $display("  %-34s %0d", name, n);
  endtask

  real A [256][256], B [256][512], C [512][64];

  initial begin
    int cyc, bad;
    real e, mx, sum, g, row [512];
    for (int i = 0; i < 256; i++) for (int k = 0; k < 256; k++) begin
      A[i][k] = (real'($urandom_range(0, 64)) - 32.0) / 64.0; u_dram.mem[A_AD + i*256 + k] = r2q(A[i][k]);
    end
    for (int k = 0; k < 256; k++) for (int j = 0; j < 512; j++) begin
      B[k][j] = (real'($urandom_range(0, 64)) - 32.0) / 64.0; u_dram.mem[B_AD + k*512 + j] = r2q(B[k][j]);
    end
    for (int k = 0; k < 512; k++) for (int j = 0; j < 64; j++) begin
      C[k][j] = (real'($urandom_range(0, 64)) - 32.0) / 64.0; u_dram.mem[C_AD + k*64 + j] = r2q(C[k][j]);
    end
    for (int a = 0; a < 256*512; a++) u_dram.mem[S_AD + a] = 32'h7fff_0000;   // stale data
    build();
    prog_len = 32'(pc);
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    @(posedge clk);
    while (!done) begin @(posedge clk); cyc++; end
    $display("case study: %0d instruction words, done after %0d cycles", pc, cyc);
    // S = softmax(A x B), row by row
    bad = 0;
    for (int i = 0; i < 256; i++) begin
      mx = -1e9; sum = 0;
      for (int j = 0; j < 512; j++) begin
        row[j] = 0;
        for (int k = 0; k < 256; k++) row[j] += A[i][k] * B[k][j];
        if (row[j] > mx) mx = row[j];
      end
      for (int j = 0; j < 512; j++) begin row[j] = $exp(row[j] - mx); sum += row[j]; end
      for (int j = 0; j < 512; j++) begin
        e = row[j] / sum; g = q2r(u_dram.mem[S_AD + i*512 + j]);
        checks++;
        if (g - e > 0.0005 + 0.01*e || e - g > 0.0005 + 0.01*e) begin
          failures++; if (bad++ < 10) $display("FAIL S[%0d][%0d] = %f, expected %f", i, j, g, e);
        end
      end
    end
    // R = S x C with S as stored
    for (int i = 0; i < 256; i++) for (int j = 0; j < 64; j++) begin
      e = 0;
      for (int k = 0; k < 512; k++) e += q2r(u_dram.mem[S_AD + i*512 + k]) * C[k][j];
      g = q2r(u_dram.mem[R_AD + i*64 + j]);
      checks++;
      if (g - e > 0.01 || e - g > 0.01) begin
        failures++; if (bad++ < 20) $display("FAIL R[%0d][%0d] = %f, expected %f", i, j, g, e);
      end
    end
    $display("Mechanisms:");
    mech("sync unit holds dependent load", n_sync);
    mech("MMU0 ping compute + pong load", n_pingpong);
    mech("SFU0 source switches (gather)", n_gather);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
