// dora_sync_unit -- MIU Sync Unit: read-after-write protection for DRAM.
//
// DORA writes every layer's result back to DRAM and later layers read it
// again. A load that runs before the write-back it depends on has finished
// would read stale data. The Sync Unit sits at the head of the MIU's
// instruction stream and keeps a Ready List Table, one bit per layer, set
// when the Store Unit reports on the ready stream that the layer's write-back
// is complete. Each cycle it (1) records any ready report in the table,
// (2) checks whether the instruction at its input is ready: a store always
// is, a load is once the table holds every layer named in dep0/dep1,
// (3) issues a ready instruction to the Load Unit and takes the next one.
// An unready load holds the whole stream, in order, while the unit keeps
// watching the ready stream; `stall` is high during those cycles.
//
// Interface: decoded instruction in (valid/ready), decoded instruction out to
// the Load Unit (valid/ready, combinational pass-through once ready), ready
// stream in (layer id, always accepted). The table is cleared by reset and
// by `clear`. The loop of Fig. 5 follows the paper; the dependency encoding
// (up to two layer ids per load) is this design's choice. The instruction
// itself passes through unchanged (out_hdr/out_body are wires from
// in_hdr/in_body); the unit only decides when it may pass.
module dora_sync_unit
  import dora_pkg::*;
#(
  parameter int MAX_LAYERS = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  // instruction stream from the IDU (already assembled)
  input  logic                  in_valid,
  output logic                  in_ready,
  input  hdr_t                  in_hdr,
  input  miu_body_t             in_body,
  // instruction stream to the Load Unit
  output logic                  out_valid,
  input  logic                  out_ready,
  output hdr_t                  out_hdr,
  output miu_body_t             out_body,
  // ready stream from the Store Unit
  input  logic                  rdy_valid,
  output logic                  rdy_ready,
  input  logic [7:0]            rdy_layer,
  // status
  output logic                  stall,
  output logic [MAX_LAYERS-1:0] ready_list
);
  logic deps_ok;

  assign rdy_ready = 1'b1;

  always_comb begin
    deps_ok = 1'b1;
    if (in_hdr.op_type == OP_MIU_LOAD) begin
      if (in_body.dep0_v && (int'(in_body.dep0) >= MAX_LAYERS || !ready_list[in_body.dep0]))
        deps_ok = 1'b0;
      if (in_body.dep1_v && (int'(in_body.dep1) >= MAX_LAYERS || !ready_list[in_body.dep1]))
        deps_ok = 1'b0;
    end
  end

  assign out_valid = in_valid && deps_ok;
  assign in_ready  = out_ready && deps_ok;
  assign out_hdr   = in_hdr;
  assign out_body  = in_body;
  assign stall     = in_valid && !deps_ok;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ready_list <= '0;
    end else if (rdy_valid && int'(rdy_layer) < MAX_LAYERS) begin
      ready_list[rdy_layer] <= 1'b1;
    end
  end
endmodule
