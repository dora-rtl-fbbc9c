// tb_dora_lmu -- three LMU instructions: (A) load a 6x10 tile into the ping
// bank from the MIU; (B) load a new 6x10 tile into the pong bank while
// sending the ping tile twice to MMU0 (count = 2); (C) send the 3x5
// sub-rectangle rows 2..4, cols 3..7 of the pong tile to SFU0, is_last.
// The testbench drives the network input with random gaps and the output
// with random back-pressure. Checks every sent word and its destination, the
// network source the LMU selects, that load and send of (B) overlap in time,
// that the send streams one word per cycle when never back-pressured
// (second run of the same program) and that done rises.
module tb_dora_lmu;
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
  logic done;

  dora_lmu dut (.*);

  int exp_q [$];
  int exp_d [$];
  int overlap = 0;
  bit full_rate = 0;
  int send_cycles = 0, send_beats = 0;

  task automatic send_word(input logic [31:0] w);
    @(negedge clk);
    ins_valid = 1; ins_data = w;
    #1;
    while (!ins_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ins_valid = 0;
  endtask

  task automatic send_lmu(input bit last, input lmu_body_t b);
    send_word(mk_hdr(last, OP_LMU, 1, LMU_BODY_WORDS));
    for (int w = 0; w < LMU_BODY_WORDS; w++) send_word(lmu_word(b, w));
  endtask

  task automatic feed(input int n, input int base);
    for (int k = 0; k < n; k++) begin
      if (!full_rate) repeat ($urandom_range(0, 1)) @(negedge clk);
      @(negedge clk);
      i_valid = 1; i_data = 32'(base + k);
      #1;
      while (!i_ready) begin @(negedge clk); #1; end
      checks++;
      if (i_src != uid_t'(0)) begin failures++; $display("FAIL source %0d", i_src); end
      @(posedge clk);
      #1 i_valid = 0;
    end
  endtask

  task automatic run_program();
    lmu_body_t b;
    // A
    b = '0; b.ping_buf = 0; b.load_op = 1; b.src_pu = 0; b.row_len = 10;
    b.start_row = 0; b.end_row = 5; b.start_col = 0; b.end_col = 9;
    send_lmu(0, b);
    feed(60, 100);
    // B
    b = '0; b.ping_buf = 1; b.pong_buf = 0; b.load_op = 1; b.send_op = 1; b.count = 2;
    b.src_pu = 0; b.des_pu = 15; b.row_len = 10;
    b.start_row = 0; b.end_row = 5; b.start_col = 0; b.end_col = 9;
    for (int rep = 0; rep < 2; rep++) for (int k = 0; k < 60; k++) begin exp_q.push_back(100 + k); exp_d.push_back(15); end
    send_lmu(0, b);
    feed(60, 500);
    // C
    b = '0; b.pong_buf = 1; b.send_op = 1; b.count = 1; b.des_pu = 21; b.row_len = 10;
    b.start_row = 2; b.end_row = 4; b.start_col = 3; b.end_col = 7;
    for (int r = 2; r <= 4; r++) for (int c = 3; c <= 7; c++) begin exp_q.push_back(500 + r*10 + c); exp_d.push_back(21); end
    send_lmu(1, b);
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
  endtask

  always @(negedge clk) o_ready = full_rate ? 1'b1 : ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready && i_valid && i_ready) overlap++;
    if (dut.sd_act || dut.sv) send_cycles++;
    if (o_valid && o_ready) begin
      send_beats++;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        int e, d;
        e = exp_q.pop_front(); d = exp_d.pop_front();
        if (int'(o_data) != e || int'(o_dst) != d) begin
          failures++; $display("FAIL got %0d to %0d, expected %0d to %0d", o_data, o_dst, e, d);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_program();
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL load and send never overlapped"); end
    // second run at full rate, after reset
    rst_n = 0; full_rate = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_cycles = 0; send_beats = 0;
    run_program();
    checks++;
    if (send_cycles > send_beats + 4) begin
      failures++; $display("FAIL send took %0d cycles for %0d words", send_cycles, send_beats);
    end
    $display("LMU: %0d overlap beats; full-rate send %0d words in %0d cycles", overlap, send_beats, send_cycles);
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
