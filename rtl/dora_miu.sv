// dora_miu -- Memory Interface Unit: Sync Unit, Load Unit and Store Unit.
//
// The MIU moves tiles between off-chip DRAM and the LMUs and keeps DRAM
// read-after-write safe between layers. Its instruction stream from the IDU
// is assembled by an instruction receiver, passes through the Sync Unit
// (which holds loads whose producer layers are not yet written back), then
// reaches the Load Unit. The Load Unit executes loads and queues stores for
// the Store Unit (4-entry queue). The Store Unit reports finished layers on
// the ready stream (2-entry queue) back to the Sync Unit. On the network the
// MIU is unit 0: the Load Unit drives its output stream and the Store Unit
// owns its input stream.
//
// `done` rises when the is_last instruction has run and nothing is pending.
// `sync_stall` is high while the Sync Unit holds a load. The structure
// follows the paper's Fig. 5; queue depths and ports are this design's.
module dora_miu
  import dora_pkg::*;
#(
  parameter int MAX_LAYERS = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction stream from the IDU
  input  logic        ins_valid,
  output logic        ins_ready,
  input  logic [31:0] ins_data,
  // DRAM read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output logic [31:0] rd_req_addr,
  input  logic        rd_rvalid,
  input  word_t       rd_rdata,
  // DRAM write port
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output word_t       wr_data,
  // network
  output logic        o_valid,
  input  logic        o_ready,
  output word_t       o_data,
  output uid_t        o_dst,
  input  logic        i_valid,
  output logic        i_ready,
  input  word_t       i_data,
  output uid_t        i_src,
  // status
  output logic        done,
  output logic        sync_stall
);
  logic                 rx_valid, rx_ready;
  hdr_t                 rx_hdr;
  logic [MAX_BODY*32-1:0] rx_body;

  dora_instr_rx u_rx (
    .clk, .rst_n,
    .in_valid(ins_valid), .in_ready(ins_ready), .in_data(ins_data),
    .ins_valid(rx_valid), .ins_ready(rx_ready), .ins_hdr(rx_hdr), .ins_body(rx_body)
  );

  logic      sy_valid, sy_ready;
  hdr_t      sy_hdr;
  miu_body_t sy_body;
  logic      rq_valid, rq_ready;
  logic [7:0] rq_layer;
  logic      rs_valid, rs_ready;
  logic [7:0] rs_layer;
  logic [MAX_LAYERS-1:0] ready_list;

  dora_sync_unit #(.MAX_LAYERS(MAX_LAYERS)) u_sync (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(rx_valid), .in_ready(rx_ready), .in_hdr(rx_hdr),
    .in_body(miu_body_t'(rx_body[MAX_BODY*32-1 -: MIU_BODY_WORDS*32])),
    .out_valid(sy_valid), .out_ready(sy_ready), .out_hdr(sy_hdr), .out_body(sy_body),
    .rdy_valid(rq_valid), .rdy_ready(rq_ready), .rdy_layer(rq_layer),
    .stall(sync_stall), .ready_list(ready_list)
  );

  logic      lq_valid, lq_ready;
  hdr_t      lq_hdr;
  miu_body_t lq_body;
  logic      load_last;

  dora_load_unit u_load (
    .clk, .rst_n,
    .in_valid(sy_valid), .in_ready(sy_ready), .in_hdr(sy_hdr), .in_body(sy_body),
    .st_valid(lq_valid), .st_ready(lq_ready), .st_hdr(lq_hdr), .st_body(lq_body),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rvalid, .rd_rdata,
    .o_valid, .o_ready, .o_data, .o_dst,
    .last_seen(load_last)
  );

  localparam int QW = $bits(hdr_t) + $bits(miu_body_t);
  logic          sq_valid, sq_ready, sq_empty;
  logic [QW-1:0] sq_data;
  logic          rq_empty;

  dora_fifo #(.WIDTH(QW), .DEPTH(4)) u_stq (
    .clk, .rst_n,
    .in_valid(lq_valid), .in_ready(lq_ready), .in_data({lq_hdr, lq_body}),
    .out_valid(sq_valid), .out_ready(sq_ready), .out_data(sq_data), .empty(sq_empty)
  );

  logic st_idle, st_last;
  dora_store_unit u_store (
    .clk, .rst_n,
    .in_valid(sq_valid), .in_ready(sq_ready),
    .in_hdr(hdr_t'(sq_data[QW-1 -: $bits(hdr_t)])),
    .in_body(miu_body_t'(sq_data[$bits(miu_body_t)-1:0])),
    .i_valid, .i_ready, .i_data, .i_src,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rdy_valid(rs_valid), .rdy_ready(rs_ready), .rdy_layer(rs_layer),
    .idle(st_idle), .last_seen(st_last)
  );

  dora_fifo #(.WIDTH(8), .DEPTH(2)) u_rdyq (
    .clk, .rst_n,
    .in_valid(rs_valid), .in_ready(rs_ready), .in_data(rs_layer),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_layer), .empty(rq_empty)
  );

  assign done = load_last && sq_empty && st_idle && rq_empty;
endmodule
