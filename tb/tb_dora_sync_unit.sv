// tb_dora_sync_unit -- feeds a store, then loads that depend on layers not
// yet written back, and reports layers on the ready stream at known times.
// Checks that stores pass at once, that each load leaves only after all of
// its dependencies are in the Ready List Table (never earlier), that the
// stream stays in order while held, and that the stall output is high
// exactly while a load is held.
module tb_dora_sync_unit;
  import dora_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  hdr_t in_hdr = '0;
  miu_body_t in_body = '0;
  logic out_valid, out_ready = 1;
  hdr_t out_hdr;
  miu_body_t out_body;
  logic rdy_valid = 0, rdy_ready;
  logic [7:0] rdy_layer = 0;
  logic stall;
  logic [255:0] ready_list;
  logic clear = 0;

  dora_sync_unit dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // instruction i: op, dep0_v, dep0, dep1_v, dep1, layer id as tag
  typedef struct { int op; bit d0v; int d0; bit d1v; int d1; int tag; int earliest; } ins_t;
  ins_t prog [6];
  int out_cyc [6];
  int nout = 0, stall_cycles = 0;

  task automatic report_layer(input int l, input int at);
    while (cyc < at) @(posedge clk);
    @(negedge clk); rdy_valid = 1; rdy_layer = 8'(l);
    @(posedge clk); #1 rdy_valid = 0;
  endtask

  initial begin
    prog[0] = '{OP_MIU_STORE, 0, 0, 0, 0, 10, 0};
    prog[1] = '{OP_MIU_LOAD,  1, 1, 0, 0, 11, 40};   // needs layer 1 (at 40)
    prog[2] = '{OP_MIU_STORE, 0, 0, 0, 0, 12, 40};   // behind the held load
    prog[3] = '{OP_MIU_LOAD,  1, 2, 1, 3, 13, 80};   // needs 2 (at 60) and 3 (at 80)
    prog[4] = '{OP_MIU_LOAD,  1, 1, 0, 0, 14, 80};   // layer 1 already ready
    prog[5] = '{OP_MIU_LOAD,  0, 0, 0, 0, 15, 80};   // no dependency
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int i = 0; i < 6; i++) begin
          @(negedge clk);
          in_valid = 1;
          in_hdr = '0; in_hdr.op_type = 4'(prog[i].op);
          in_body = '0;
          in_body.dep0_v = prog[i].d0v; in_body.dep0 = 8'(prog[i].d0);
          in_body.dep1_v = prog[i].d1v; in_body.dep1 = 8'(prog[i].d1);
          in_body.layer_id = 8'(prog[i].tag);
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(posedge clk);
          #1 in_valid = 0;
        end
      end
      begin
        report_layer(1, 40);
        report_layer(2, 60);
        report_layer(3, 80);
      end
    join
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 6) begin failures++; $display("FAIL only %0d issued", nout); end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (out_cyc[i] < prog[i].earliest) begin
        failures++; $display("FAIL instr %0d issued at %0d, before %0d", i, out_cyc[i], prog[i].earliest);
      end
      checks++;
      if (out_cyc[i] > prog[i].earliest + 4) begin
        failures++; $display("FAIL instr %0d issued late at %0d", i, out_cyc[i]);
      end
    end
    checks++;
    if (stall_cycles < 70) begin failures++; $display("FAIL stall cycles %0d", stall_cycles); end
    checks++;
    if (ready_list[3:1] != 3'b111 || ready_list[0]) begin failures++; $display("FAIL ready list"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (stall) stall_cycles++;
    checks++;
    if (stall !== (in_valid && !out_valid)) begin failures++; $display("FAIL stall flag"); end
    if (out_valid && out_ready) begin
      checks++;
      if (int'(out_body.layer_id) != prog[nout].tag) begin
        failures++; $display("FAIL order: got %0d expected %0d", out_body.layer_id, prog[nout].tag);
      end
      out_cyc[nout] = cyc;
      nout++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
