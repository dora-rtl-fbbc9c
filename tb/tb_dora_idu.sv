// tb_dora_idu -- fills an instruction memory with random instructions for
// random units (including one for a unit that does not exist), runs the IDU
// with random memory latency and random unit back-pressure, and checks that
// each unit receives exactly its own header and body words in program order.
// Also checks that the IDU needs at least three cycles per word (request,
// response, dispatch) and finishes (busy low) after the last word.
module tb_dora_idu;
  import dora_pkg::*;
  import tb_util_pkg::*;
  localparam int N = N_UNITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  logic [31:0] base_addr = 32'd100, prog_len = 0;
  logic busy;
  logic mem_req_valid, mem_req_ready = 1;
  logic [31:0] mem_req_addr;
  logic mem_rvalid = 0;
  logic [31:0] mem_rdata = 0;
  logic u_valid [N];
  logic u_ready [N];
  logic [31:0] u_data;

  dora_idu #(.N(N)) dut (.*);

  logic [31:0] imem [1024];
  logic [31:0] expq [N][$];
  int nwords = 0;

  // instruction memory: one request at a time, 0..3 cycles of latency
  initial begin
    forever begin
      @(negedge clk);
      if (mem_req_valid) begin
        logic [31:0] a;
        a = mem_req_addr;
        @(posedge clk);
        repeat ($urandom_range(0, 3)) @(posedge clk);
        #1 mem_rvalid = 1; mem_rdata = imem[a];
        @(posedge clk);
        #1 mem_rvalid = 0;
      end
    end
  end

  // units: random ready, compare words
  initial begin
    for (int k = 0; k < N; k++) u_ready[k] = 0;
    forever begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        u_ready[k] = ($urandom_range(0, 3) != 0);
        if (u_valid[k] && u_ready[k]) begin
          checks++;
          if (expq[k].size() == 0) begin failures++; $display("FAIL unexpected word to %0d", k); end
          else begin
            logic [31:0] e;
            e = expq[k].pop_front();
            if (e != u_data) begin failures++; $display("FAIL unit %0d got %h exp %h", k, u_data, e); end
          end
        end
      end
    end
  end

  initial begin
    int a, cyc;
    a = 100;
    for (int i = 0; i < 30; i++) begin
      int des, len;
      des = (i == 7) ? 200 : $urandom_range(0, N-1);   // i==7: no such unit
      len = $urandom_range(0, MAX_BODY);
      imem[a] = mk_hdr(i == 29, $urandom_range(0, 15), des, len);
      if (des < N) expq[des].push_back(imem[a]);
      a++;
      for (int w = 0; w < len; w++) begin
        imem[a] = $urandom;
        if (des < N) expq[des].push_back(imem[a]);
        a++;
      end
    end
    nwords = a - 100;
    prog_len = 32'(nwords);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (busy) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (expq[k].size() != 0) begin failures++; $display("FAIL unit %0d missing %0d words", k, expq[k].size()); end
    end
    checks++;
    if (cyc < 3*nwords) begin failures++; $display("FAIL too fast: %0d cycles for %0d words", cyc, nwords); end
    $display("IDU: %0d words in %0d cycles", nwords, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
