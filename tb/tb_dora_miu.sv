// tb_dora_miu -- the read-after-write case of the paper's case study at the
// MIU level. Program (as IDU word streams): load a 4x6 tile of layer 0 to
// LMU0; store a 3x5 result of layer 1 from LMU3 (last store of layer 1);
// load that same region back to LMU1 with a dependency on layer 1; a last
// (is_last) store of 4 words from LMU5.
// The testbench plays the LMUs: it accepts load words and supplies the store
// words only after a long delay. Checks: the first load returns the DRAM
// contents; the dependent load is held until the write-back finished (the
// Sync Unit stalls) and then returns the new values, not the stale ones;
// all data and destinations are correct; done rises only after the last
// store's words are in DRAM.
module tb_dora_miu;
  import dora_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_valid = 0, ins_ready;
  logic [31:0] ins_data = 0;
  logic rd_req_valid, rd_req_ready, rd_rvalid;
  logic [31:0] rd_req_addr;
  word_t rd_rdata;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  word_t wr_data;
  logic o_valid, o_ready = 1;
  word_t o_data;
  uid_t o_dst;
  logic i_valid = 0, i_ready;
  word_t i_data = 0;
  uid_t i_src;
  logic done, sync_stall;

  dora_miu dut (.*);
  dram_model #(.DEPTH(1 << 14)) u_dram (
    .clk, .rd_valid(rd_req_valid && rst_n), .rd_ready(rd_req_ready), .rd_addr(rd_req_addr),
    .rvalid(rd_rvalid), .rdata(rd_rdata),
    .wr_valid(wr_valid && rst_n), .wr_ready, .wr_addr, .wr_data);

  int exp_q [$];
  int exp_d [$];
  int stall_cycles = 0;
  int store_end_cyc = -1, dep_first_cyc = -1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic send_word(input logic [31:0] w);
    @(negedge clk);
    ins_valid = 1; ins_data = w;
    #1;
    while (!ins_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ins_valid = 0;
  endtask

  task automatic send_miu(input bit last, input int op, input miu_body_t b);
    send_word(mk_hdr(last, op, 0, MIU_BODY_WORDS));
    for (int w = 0; w < MIU_BODY_WORDS; w++) send_word(miu_word(b, w));
  endtask

  localparam int BASE = 512, NC = 16;   // 16-column matrix at 512

  initial begin
    miu_body_t b;
    for (int a = 0; a < 256; a++) u_dram.mem[BASE + a] = 32'(a);   // stale values
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1: load layer 0, rows 0..3 cols 0..5 -> LMU0
    b = '0; b.ddr_addr = BASE; b.m = 16; b.n = NC; b.start_row = 0; b.end_row = 3;
    b.start_col = 0; b.end_col = 5; b.des_lmu = 0; b.layer_id = 0;
    for (int r = 0; r <= 3; r++) for (int c = 0; c <= 5; c++) begin exp_q.push_back(r*NC + c); exp_d.push_back(1); end
    send_miu(0, OP_MIU_LOAD, b);
    // 2: store layer 1 from LMU3, rows 5..7 cols 2..6
    b = '0; b.ddr_addr = BASE; b.m = 16; b.n = NC; b.start_row = 5; b.end_row = 7;
    b.start_col = 2; b.end_col = 6; b.src_lmu = 3; b.layer_id = 1; b.layer_done = 1;
    send_miu(0, OP_MIU_STORE, b);
    // 3: load that region to LMU1, depends on layer 1
    b.src_lmu = 0; b.des_lmu = 1; b.layer_id = 2; b.layer_done = 0; b.dep0_v = 1; b.dep0 = 1;
    for (int r = 5; r <= 7; r++) for (int c = 2; c <= 6; c++) begin exp_q.push_back(1000 + r*NC + c); exp_d.push_back(2); end
    send_miu(0, OP_MIU_LOAD, b);
    // 4: last instruction, a store from LMU5 of row 0 cols 0..3 to a second matrix
    b = '0; b.ddr_addr = BASE + 256; b.m = 1; b.n = NC; b.start_row = 0; b.end_row = 0;
    b.start_col = 0; b.end_col = 3; b.src_lmu = 5; b.layer_id = 3;
    send_miu(1, OP_MIU_STORE, b);
  end

  // LMU3 supplies the store data late
  initial begin
    @(posedge rst_n);
    repeat (150) @(posedge clk);
    for (int r = 5; r <= 7; r++) for (int c = 2; c <= 6; c++) begin
      @(negedge clk);
      i_valid = (i_src == uid_t'(4)); i_data = 32'(1000 + r*NC + c);
      #1;
      while (!(i_ready && i_src == uid_t'(4))) begin @(negedge clk); i_valid = (i_src == uid_t'(4)); #1; end
      @(posedge clk);
      #1 i_valid = 0;
    end
    while (u_dram.writes < 15) @(posedge clk);
    store_end_cyc = cyc;
    // LMU5 supplies the last store's data 100 cycles later
    repeat (100) @(posedge clk);
    for (int c = 0; c <= 3; c++) begin
      @(negedge clk);
      i_valid = (i_src == uid_t'(6)); i_data = 32'(2000 + c);
      #1;
      while (!(i_ready && i_src == uid_t'(6))) begin @(negedge clk); i_valid = (i_src == uid_t'(6)); #1; end
      @(posedge clk);
      #1 i_valid = 0;
    end
  end

  always @(negedge clk) o_ready = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (sync_stall) stall_cycles++;
    if (o_valid && o_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        int e, d;
        e = exp_q.pop_front(); d = exp_d.pop_front();
        if (d == 2 && dep_first_cyc < 0) dep_first_cyc = cyc;
        if (int'(o_data) != e || int'(o_dst) != d) begin
          failures++; $display("FAIL got %0d to %0d, expected %0d to %0d", o_data, o_dst, e, d);
        end
      end
    end
  end

  initial begin
    @(posedge rst_n);
    while (!done) @(posedge clk);
    checks++;
    if (u_dram.writes != 19) begin failures++; $display("FAIL done with %0d of 19 DRAM writes", u_dram.writes); end
    for (int c = 0; c <= 3; c++) begin
      checks++;
      if (u_dram.mem[BASE + 256 + c] != 32'(2000 + c)) begin failures++; $display("FAIL last store word %0d", c); end
    end
    for (int r = 5; r <= 7; r++) for (int c = 2; c <= 6; c++) begin
      checks++;
      if (u_dram.mem[BASE + r*NC + c] != 32'(1000 + r*NC + c)) begin failures++; $display("FAIL store word %0d,%0d", r, c); end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
    checks++;
    if (stall_cycles < 50) begin failures++; $display("FAIL sync stall only %0d cycles", stall_cycles); end
    checks++;
    if (dep_first_cyc < store_end_cyc) begin failures++; $display("FAIL dependent load at %0d before write-back end %0d", dep_first_cyc, store_end_cyc); end
    $display("MIU: sync stall %0d cycles, write-back done at %0d, dependent load at %0d", stall_cycles, store_end_cyc, dep_first_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
