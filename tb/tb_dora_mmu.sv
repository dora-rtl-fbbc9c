// tb_dora_mmu -- drives the MMU through a double-buffered pair of products:
//   1 ping LOAD_LHS (5x7) from LMU2            (data held back first: stall)
//   2 ping LOAD_RHS (7x6)
//   3 ping COMPUTE          | pong LOAD_LHS
//   4 ping STORE to LMU4    | pong LOAD_RHS
//   5 pong COMPUTE                              (alone: timed)
//   6 pong STORE to LMU4, is_last
// Operands are random small integers in Q16.16, so the products are exact
// and the reference is a plain integer matrix product. Checks both results
// word by word, the source and destination units, that the MMU stalled on
// the empty input stream, that compute and load overlap in instruction 3,
// and that a lone COMPUTE takes bound_i*bound_j*bound_k cycles (+2).
module tb_dora_mmu;
  import dora_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_valid = 0, ins_ready;
  logic [31:0] ins_data = 0;
  logic o_valid, o_ready = 0;
  word_t o_data;
  uid_t o_dst;
  logic i_valid = 0, i_ready;
  word_t i_data = 0;
  uid_t i_src;
  logic done, in_stall;

  dora_mmu dut (.*);

  localparam int BI = 5, BK = 7, BJ = 6;
  int a0 [BI][BK], b0 [BK][BJ], a1 [BI][BK], b1 [BK][BJ];
  int exp_q [$];
  int stall_cycles = 0, overlap = 0, t_start = 0, t_comp = -1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic send_word(input logic [31:0] w);
    @(negedge clk);
    ins_valid = 1; ins_data = w;
    #1;
    while (!ins_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ins_valid = 0;
  endtask

  task automatic send_mmu(input bit last, input mmu_op_e p0, input mmu_op_e p1);
    mmu_body_t b;
    b = '0; b.ping_op = p0; b.pong_op = p1; b.src_lmu = 2; b.des_lmu = 4;
    b.bound_i = BI; b.bound_k = BK; b.bound_j = BJ;
    send_word(mk_hdr(last, OP_MMU, 15, MMU_BODY_WORDS));
    for (int w = 0; w < MMU_BODY_WORDS; w++) send_word(mmu_word(b, w));
  endtask

  // operand stream as LMU2 (unit 3): A0, B0, A1, B1
  initial begin
    @(posedge rst_n);
    repeat (60) @(posedge clk);              // nothing to send yet: MMU must wait
    for (int m = 0; m < 4; m++) begin
      int rows, cols;
      rows = (m % 2 == 0) ? BI : BK; cols = (m % 2 == 0) ? BK : BJ;
      for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
        int v;
        v = (m == 0) ? a0[r][c] : (m == 1) ? b0[r][c] : (m == 2) ? a1[r][c] : b1[r][c];
        @(negedge clk);
        i_valid = (i_src == uid_t'(3)); i_data = 32'(v * 65536);
        #1;
        while (!(i_ready && i_src == uid_t'(3))) begin @(negedge clk); i_valid = (i_src == uid_t'(3)); #1; end
        @(posedge clk);
        #1 i_valid = 0;
      end
    end
  end

  always @(negedge clk) o_ready = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (in_stall) stall_cycles++;
    if (dut.g_bank[0].mac && i_valid && i_ready) overlap++;
    if (o_valid && o_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        int e;
        e = exp_q.pop_front();
        if ($signed(o_data) != e || o_dst != uid_t'(5)) begin
          failures++; $display("FAIL got %0d to %0d, expected %0d", $signed(o_data), o_dst, e);
        end
      end
    end
  end

  initial begin
    for (int r = 0; r < BI; r++) for (int c = 0; c < BK; c++) begin
      a0[r][c] = $urandom_range(0, 16) - 8; a1[r][c] = $urandom_range(0, 16) - 8;
    end
    for (int r = 0; r < BK; r++) for (int c = 0; c < BJ; c++) begin
      b0[r][c] = $urandom_range(0, 16) - 8; b1[r][c] = $urandom_range(0, 16) - 8;
    end
    for (int m = 0; m < 2; m++)
      for (int i = 0; i < BI; i++) for (int j = 0; j < BJ; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < BK; k++) s += (m == 0) ? a0[i][k]*b0[k][j] : a1[i][k]*b1[k][j];
        exp_q.push_back(s * 65536);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_mmu(0, MMU_LOAD_LHS, MMU_NOP);
    send_mmu(0, MMU_LOAD_RHS, MMU_NOP);
    send_mmu(0, MMU_COMPUTE,  MMU_LOAD_LHS);
    send_mmu(0, MMU_STORE,    MMU_LOAD_RHS);
    while (dut.run || dut.rx_valid) @(posedge clk);
    send_mmu(0, MMU_NOP,      MMU_COMPUTE);
    while (!dut.run) @(posedge clk);
    t_start = cyc;
    while (dut.run) @(posedge clk);
    t_comp = cyc - t_start;
    send_mmu(1, MMU_NOP,      MMU_STORE);
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
    checks++;
    if (stall_cycles < 20) begin failures++; $display("FAIL no input stall (%0d)", stall_cycles); end
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL compute and load never overlapped"); end
    checks++;
    if (t_comp < BI*BJ*BK || t_comp > BI*BJ*BK + 2) begin
      failures++; $display("FAIL compute took %0d cycles, expected %0d", t_comp, BI*BJ*BK);
    end
    $display("MMU: stall %0d cycles, overlap %0d beats, compute %0d cycles", stall_cycles, overlap, t_comp);
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
