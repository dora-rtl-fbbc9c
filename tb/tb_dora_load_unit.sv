// tb_dora_load_unit -- runs two load instructions with a store instruction
// between them against a DRAM model holding a known matrix (element (r,c) of
// the matrix at address 1000 is r*1000+c). Checks that every streamed word is
// the right element of the requested rectangle, in row-major order, sent to
// the right LMU, under random network back-pressure; that the store is handed
// to the Store Unit side unchanged and in order; and that last_seen rises
// after the is_last instruction.
module tb_dora_load_unit;
  import dora_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  hdr_t in_hdr = '0;
  miu_body_t in_body = '0;
  logic st_valid, st_ready = 0;
  hdr_t st_hdr;
  miu_body_t st_body;
  logic rd_req_valid, rd_req_ready, rd_rvalid;
  logic [31:0] rd_req_addr;
  word_t rd_rdata;
  logic o_valid, o_ready = 0;
  word_t o_data;
  uid_t o_dst;
  logic last_seen;
  logic wv = 0, wr;
  logic [31:0] wa = 0, wd = 0;

  dora_load_unit dut (.*);
  dram_model #(.DEPTH(1 << 16)) u_dram (
    .clk, .rd_valid(rd_req_valid && rst_n), .rd_ready(rd_req_ready), .rd_addr(rd_req_addr),
    .rvalid(rd_rvalid), .rdata(rd_rdata),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  localparam int N = 40;                       // matrix columns
  int exp_q [$];
  int exp_dst [$];
  int got_st = 0;

  task automatic send_ins(input int op, input bit last, input int sr, input int er,
                          input int sc, input int ec, input int lmu);
    @(negedge clk);
    in_valid = 1;
    in_hdr = '0; in_hdr.op_type = 4'(op); in_hdr.is_last = last;
    in_body = '0;
    in_body.ddr_addr = 32'd1000; in_body.m = 16'd30; in_body.n = 16'(N);
    in_body.start_row = 16'(sr); in_body.end_row = 16'(er);
    in_body.start_col = 16'(sc); in_body.end_col = 16'(ec);
    in_body.des_lmu = 8'(lmu); in_body.src_lmu = 8'(lmu); in_body.layer_id = 8'(sr);
    if (op == OP_MIU_LOAD)
      for (int r = sr; r <= er; r++)
        for (int c = sc; c <= ec; c++) begin exp_q.push_back(r*1000 + c); exp_dst.push_back(1 + lmu); end
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    for (int r = 0; r < 30; r++)
      for (int c = 0; c < N; c++) u_dram.mem[1000 + r*N + c] = 32'(r*1000 + c);
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_ins(OP_MIU_LOAD, 0, 2, 5, 3, 9, 4);
    send_ins(OP_MIU_STORE, 0, 7, 7, 0, 0, 6);
    send_ins(OP_MIU_LOAD, 1, 10, 12, 30, 39, 13);
    while (!last_seen) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
    checks++;
    if (got_st != 1) begin failures++; $display("FAIL store handed on %0d times", got_st); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    o_ready  = ($urandom_range(0, 2) != 0);
    st_ready = ($urandom_range(0, 1) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (o_valid && o_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        int e, d;
        e = exp_q.pop_front(); d = exp_dst.pop_front();
        if (int'(o_data) != e || int'(o_dst) != d) begin
          failures++; $display("FAIL word %0d to %0d, expected %0d to %0d", o_data, o_dst, e, d);
        end
      end
    end
    if (st_valid && st_ready) begin
      got_st++;
      checks++;
      if (st_hdr.op_type != OP_MIU_STORE || st_body.start_row != 16'd7 || st_body.src_lmu != 8'd6) begin
        failures++; $display("FAIL store instruction altered");
      end
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL store handed on before first load ended"); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
