// dora_fc_network -- fully-connected streaming network between all units.
//
// Every unit has one output stream (valid, data, destination unit) and one
// input stream (ready, chosen source unit). Any output can reach any input.
// A beat moves from source s to destination d only when s names d as its
// destination and d names s as its source, so both ends must have been
// programmed by their instructions for the same transfer; until then the
// sender sees ready low (back-pressure) and the receiver sees valid low. This
// is how DORA's units synchronise on-chip without any extra handshaking.
// The crossbar is purely combinational (no buffering, zero latency).
// The paper gives the all-to-all connectivity and the back-pressure
// behaviour; the match-on-both-ends rule and the port format are this
// design's choice.
module dora_fc_network
  import dora_pkg::*;
#(
  parameter int N = N_UNITS
) (
  // output side of every unit (sources)
  input  logic        o_valid [N],
  input  word_t       o_data  [N],
  input  uid_t        o_dst   [N],
  output logic        o_ready [N],
  // input side of every unit (destinations)
  output logic        i_valid [N],
  output word_t       i_data  [N],
  input  logic        i_ready [N],
  input  uid_t        i_src   [N]
);
  always_comb begin
    for (int d = 0; d < N; d++) begin
      i_valid[d] = 1'b0;
      i_data[d]  = '0;
      for (int s = 0; s < N; s++) begin
        if (i_src[d] == uid_t'(s)) begin
          i_valid[d] = o_valid[s] && (o_dst[s] == uid_t'(d));
          i_data[d]  = o_data[s];
        end
      end
    end
    for (int s = 0; s < N; s++) begin
      o_ready[s] = 1'b0;
      for (int d = 0; d < N; d++) begin
        if (o_dst[s] == uid_t'(d))
          o_ready[s] = i_ready[d] && (i_src[d] == uid_t'(s));
      end
    end
  end
endmodule
