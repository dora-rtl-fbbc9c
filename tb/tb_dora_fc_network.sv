// tb_dora_fc_network -- programs random source choices at every input and
// random destinations at every output of a 24-port network, then checks for
// each port that valid, data and ready pass exactly when both ends name
// each other, and never otherwise.
module tb_dora_fc_network;
  import dora_pkg::*;
  localparam int N = N_UNITS;
  int checks = 0, failures = 0;

  logic  o_valid [N];
  word_t o_data  [N];
  uid_t  o_dst   [N];
  logic  o_ready [N];
  logic  i_valid [N];
  word_t i_data  [N];
  logic  i_ready [N];
  uid_t  i_src   [N];

  dora_fc_network #(.N(N)) dut (.*);

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < N; k++) begin
        o_valid[k] = $urandom_range(0, 1);
        o_data[k]  = $urandom;
        o_dst[k]   = uid_t'($urandom_range(0, N-1));
        i_ready[k] = $urandom_range(0, 1);
        i_src[k]   = uid_t'($urandom_range(0, N-1));
      end
      // make some pairs agree
      for (int p = 0; p < 6; p++) begin
        int s, d;
        s = $urandom_range(0, N-1); d = $urandom_range(0, N-1);
        o_dst[s] = uid_t'(d); i_src[d] = uid_t'(s);
      end
      #1;
      for (int d = 0; d < N; d++) begin
        int s;
        logic ev;
        s  = int'(i_src[d]);
        ev = o_valid[s] && (int'(o_dst[s]) == d);
        checks++;
        if (i_valid[d] !== ev) begin failures++; $display("FAIL valid d=%0d", d); end
        if (ev) begin
          checks++;
          if (i_data[d] !== o_data[s]) begin failures++; $display("FAIL data d=%0d", d); end
        end
      end
      for (int s = 0; s < N; s++) begin
        int d;
        logic er;
        d  = int'(o_dst[s]);
        er = i_ready[d] && (int'(i_src[d]) == s);
        checks++;
        if (o_ready[s] !== er) begin failures++; $display("FAIL ready s=%0d", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
