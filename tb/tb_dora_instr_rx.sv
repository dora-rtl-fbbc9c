// tb_dora_instr_rx -- sends random instructions (header plus 0..6 body
// words) with random gaps and random consumer stalls, and checks that each
// assembled instruction carries the header and the body words in order,
// with unused body words zero.
module tb_dora_instr_rx;
  import dora_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  logic [31:0] in_data = 0;
  logic ins_valid, ins_ready = 0;
  hdr_t ins_hdr;
  logic [MAX_BODY*32-1:0] ins_body;

  dora_instr_rx dut (.*);

  localparam int NI = 40;
  logic [31:0] hdrs [NI];
  logic [31:0] bodies [NI][MAX_BODY];

  initial begin
    for (int i = 0; i < NI; i++) begin
      hdrs[i] = mk_hdr(i == NI-1, $urandom_range(0, 15), $urandom_range(0, 23), $urandom_range(0, MAX_BODY));
      for (int w = 0; w < MAX_BODY; w++) bodies[i][w] = $urandom;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NI; i++) begin
      for (int w = 0; w <= int'(hdrs[i][18:11]); w++) begin
        @(negedge clk);
        in_valid = 1;
        in_data  = (w == 0) ? hdrs[i] : bodies[i][w-1];
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1 in_valid = 0;
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
    end
  end

  initial begin
    int n = 0;
    @(posedge rst_n);
    while (n < NI) begin
      @(negedge clk);
      ins_ready = ($urandom_range(0, 2) != 0);
      if (ins_valid && ins_ready) begin
        checks++;
        if (32'(ins_hdr) != hdrs[n]) begin failures++; $display("FAIL hdr %0d", n); end
        for (int w = 0; w < MAX_BODY; w++) begin
          logic [31:0] expv;
          expv = (w < int'(hdrs[n][18:11])) ? bodies[n][w] : 32'h0;
          checks++;
          if (ins_body[(MAX_BODY-1-w)*32 +: 32] != expv) begin
            failures++; $display("FAIL body %0d word %0d", n, w);
          end
        end
        n++;
      end
    end
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
