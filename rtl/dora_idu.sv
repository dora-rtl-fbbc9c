// dora_idu -- Instruction Dispatch Unit.
//
// The host writes one instruction sequence into off-chip instruction memory
// and pulses `start` with its base word address and its length in 32-bit
// words. The IDU then reads the sequence word by word. A word that begins an
// instruction is a header: the IDU decodes des_unit and valid_length from it
// and sends the header and the valid_length words that follow to unit
// des_unit over that unit's instruction stream (u_valid[des] / u_ready[des],
// data on the shared u_data). A unit that is still busy back-pressures the
// IDU, which keeps instructions to all units in program order. Headers naming
// a unit that does not exist are skipped together with their body.
//
// Memory port: request (mem_req_valid/ready, word address), response
// (mem_rvalid, mem_rdata) in order, one request outstanding at a time.
// Each word costs at least three cycles (request, response, dispatch).
// From the paper: fetching headers, decoding them, reading valid_length body
// words and dispatching on des_unit. The memory port, the start/length
// interface and the one-word-at-a-time fetch are this design's choices.
module dora_idu
  import dora_pkg::*;
#(
  parameter int N = N_UNITS
) (
  input  logic        clk,
  input  logic        rst_n,
  // host control
  input  logic        start,
  input  logic [31:0] base_addr,
  input  logic [31:0] prog_len,
  output logic        busy,
  // instruction memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic [31:0] mem_req_addr,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,
  // per-unit instruction streams
  output logic        u_valid [N],
  input  logic        u_ready [N],
  output logic [31:0] u_data
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_SEND} state_e;
  state_e      state;
  logic [31:0] addr, end_addr;
  logic [31:0] word;
  logic [7:0]  remain;     // body words left in the current instruction
  uid_t        dest;

  hdr_t hdr_in;
  assign hdr_in = hdr_t'(mem_rdata);

  assign busy          = (state != S_IDLE);
  assign mem_req_valid = (state == S_REQ);
  assign mem_req_addr  = addr;
  assign u_data        = word;

  wire dest_ok = (dest < uid_t'(N));
  logic sel_ready;
  always_comb begin
    sel_ready = 1'b1;           // words for a unit that does not exist are dropped
    for (int i = 0; i < N; i++) begin
      u_valid[i] = (state == S_SEND) && (dest == uid_t'(i));
      if (dest == uid_t'(i)) sel_ready = u_ready[i];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; addr <= '0; end_addr <= '0; word <= '0;
      remain <= '0; dest <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          addr     <= base_addr;
          end_addr <= base_addr + prog_len;
          remain   <= '0;
          state    <= (prog_len == '0) ? S_IDLE : S_REQ;
        end
        S_REQ: if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_rvalid) begin
          word <= mem_rdata;
          if (remain == '0) begin               // header
            dest   <= uid_t'(hdr_in.des_unit);
            remain <= hdr_in.valid_length;
          end else begin
            remain <= remain - 1'b1;
          end
          state <= S_SEND;
        end
        S_SEND: if (sel_ready || !dest_ok) begin
          addr  <= addr + 1'b1;
          state <= (addr + 1'b1 == end_addr) ? S_IDLE : S_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
