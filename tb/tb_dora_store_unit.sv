// tb_dora_store_unit -- gives the Store Unit two store instructions, the
// second marked layer_done, and streams the tile words from "LMU 5" with
// random gaps while the DRAM model randomly refuses writes. Checks that each
// word lands at ddr_addr + row*N + col, that no other address is written,
// that the network source is LMU 5, that the ready stream carries the layer
// id exactly once, only after the last word of the second store was written,
// and that nothing is reported for the first store.
module tb_dora_store_unit;
  import dora_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  hdr_t in_hdr = '0;
  miu_body_t in_body = '0;
  logic i_valid = 0, i_ready;
  word_t i_data = 0;
  uid_t i_src;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  word_t wr_data;
  logic rdy_valid, rdy_ready = 1;
  logic [7:0] rdy_layer;
  logic idle, last_seen;
  logic rv = 0, rr, rvv;
  logic [31:0] ra = 0, rd;

  dora_store_unit dut (.*);
  dram_model #(.DEPTH(1 << 14)) u_dram (
    .clk, .rd_valid(rv), .rd_ready(rr), .rd_addr(ra), .rvalid(rvv), .rdata(rd),
    .wr_valid(wr_valid && rst_n), .wr_ready, .wr_addr, .wr_data);

  int nrdy = 0;
  int words_written = 0;

  task automatic store(input int base, input int n, input int sr, input int er,
                       input int sc, input int ec, input bit ld, input bit last);
    @(negedge clk);
    in_valid = 1;
    in_hdr = '0; in_hdr.op_type = OP_MIU_STORE; in_hdr.is_last = last;
    in_body = '0; in_body.ddr_addr = 32'(base); in_body.n = 16'(n);
    in_body.start_row = 16'(sr); in_body.end_row = 16'(er);
    in_body.start_col = 16'(sc); in_body.end_col = 16'(ec);
    in_body.src_lmu = 8'd5; in_body.layer_id = 8'd42; in_body.layer_done = ld;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 0;
    for (int r = sr; r <= er; r++)
      for (int c = sc; c <= ec; c++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        @(negedge clk);
        i_valid = 1; i_data = 32'(base + r*n + c) ^ 32'h5A5A0000;
        #1;
        checks++;
        if (i_src != uid_t'(6)) begin failures++; $display("FAIL source %0d", i_src); end
        while (!i_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 i_valid = 0;
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    store(100, 20, 1, 3, 2, 6, 0, 0);
    store(2000, 64, 0, 4, 60, 63, 1, 1);
    while (!last_seen) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int a = 0; a < (1 << 14); a++) begin
      logic in1, in2;
      in1 = (a >= 100  && ((a-100)/20) >= 1 && ((a-100)/20) <= 3 && ((a-100)%20) >= 2 && ((a-100)%20) <= 6);
      in2 = (a >= 2000 && ((a-2000)/64) <= 4 && ((a-2000)%64) >= 60);
      if (in1 || in2) begin
        checks++;
        if (u_dram.mem[a] != (32'(a) ^ 32'h5A5A0000)) begin failures++; $display("FAIL addr %0d = %h", a, u_dram.mem[a]); end
      end else if (u_dram.mem[a] != 0) begin
        checks++; failures++; $display("FAIL stray write at %0d", a);
      end
    end
    checks++;
    if (nrdy != 1) begin failures++; $display("FAIL %0d ready reports", nrdy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) words_written++;
    if (rdy_valid && rdy_ready) begin
      nrdy++;
      checks++;
      if (rdy_layer != 8'd42) begin failures++; $display("FAIL layer id %0d", rdy_layer); end
      checks++;
      if (words_written != 15 + 20) begin failures++; $display("FAIL ready after %0d writes", words_written); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
