// dora_top -- the DORA overlay: IDU, MIU, LMUs, MMUs and SFUs on a
// fully-connected streaming network.
//
// Control plane: the host places one instruction sequence in instruction
// memory and pulses `start`. The IDU reads it and routes every instruction to
// its unit; each unit runs its own instructions in order until one marked
// is_last. Data plane: every unit has one output and one input stream on the
// fully-connected network; a transfer happens when the sender's destination
// and the receiver's source agree, so producer/consumer order between units
// comes from the streams themselves (an MMU that asks for a tile before the
// LMU sends it simply waits). The MIU moves tiles between DRAM and the LMUs
// and holds DRAM loads until the layers they read have been written back.
//
// Units and their numbers on the network (see dora_pkg): MIU 0, LMU i at
// 1+i, MMU i at 1+N_LMU_P+i, SFU i at 1+N_LMU_P+N_MMU_P+i. The defaults are
// the configuration of the paper's prototype: 14 LMUs, 6 MMUs, 3 SFUs.
// `done` rises when the IDU has dispatched the whole program and every unit
// has finished its is_last instruction, so a program must end every unit's
// sequence with one (an LMU instruction without load or send, an MMU NOP/NOP
// or an SFU instruction with count 0 serves when a unit has no work).
//
// Ports: instruction memory read port (one outstanding request), DRAM read
// and write ports of the MIU. The host CPU, instruction memory and DRAM are
// outside this design. Status outputs expose events for monitoring.
module dora_top
  import dora_pkg::*;
#(
  parameter int N_LMU_P     = N_LMU,
  parameter int N_MMU_P     = N_MMU,
  parameter int N_SFU_P     = N_SFU,
  parameter int LMU_DEPTH   = 65536,
  parameter int MMU_MAX     = 128,
  parameter int SFU_MAX_ROW = 4096,
  parameter int MAX_LAYERS  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // host
  input  logic        start,
  input  logic [31:0] base_addr,
  input  logic [31:0] prog_len,
  output logic        busy,
  output logic        done,
  // instruction memory
  output logic        imem_req_valid,
  input  logic        imem_req_ready,
  output logic [31:0] imem_req_addr,
  input  logic        imem_rvalid,
  input  logic [31:0] imem_rdata,
  // DRAM read port
  output logic        dram_rd_valid,
  input  logic        dram_rd_ready,
  output logic [31:0] dram_rd_addr,
  input  logic        dram_rvalid,
  input  word_t       dram_rdata,
  // DRAM write port
  output logic        dram_wr_valid,
  input  logic        dram_wr_ready,
  output logic [31:0] dram_wr_addr,
  output word_t       dram_wr_data,
  // monitoring
  output logic        sync_stall,
  output logic [N_MMU_P-1:0] mmu_in_stall
);
  localparam int N      = 1 + N_LMU_P + N_MMU_P + N_SFU_P;
  localparam int L0     = 1;
  localparam int M0     = 1 + N_LMU_P;
  localparam int S0     = 1 + N_LMU_P + N_MMU_P;

  logic        u_valid [N];
  logic        u_ready [N];
  logic [31:0] u_data;
  logic        idu_busy;

  logic  o_valid [N];
  word_t o_data  [N];
  uid_t  o_dst   [N];
  logic  o_ready [N];
  logic  i_valid [N];
  word_t i_data  [N];
  logic  i_ready [N];
  uid_t  i_src   [N];
  logic  unit_done [N];

  dora_idu #(.N(N)) u_idu (
    .clk, .rst_n, .start, .base_addr, .prog_len, .busy(idu_busy),
    .mem_req_valid(imem_req_valid), .mem_req_ready(imem_req_ready),
    .mem_req_addr(imem_req_addr), .mem_rvalid(imem_rvalid), .mem_rdata(imem_rdata),
    .u_valid, .u_ready, .u_data
  );

  dora_miu #(.MAX_LAYERS(MAX_LAYERS)) u_miu (
    .clk, .rst_n,
    .ins_valid(u_valid[0]), .ins_ready(u_ready[0]), .ins_data(u_data),
    .rd_req_valid(dram_rd_valid), .rd_req_ready(dram_rd_ready), .rd_req_addr(dram_rd_addr),
    .rd_rvalid(dram_rvalid), .rd_rdata(dram_rdata),
    .wr_valid(dram_wr_valid), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data),
    .o_valid(o_valid[0]), .o_ready(o_ready[0]), .o_data(o_data[0]), .o_dst(o_dst[0]),
    .i_valid(i_valid[0]), .i_ready(i_ready[0]), .i_data(i_data[0]), .i_src(i_src[0]),
    .done(unit_done[0]), .sync_stall
  );

  for (genvar g = 0; g < N_LMU_P; g++) begin : g_lmu
    dora_lmu #(.BANK_DEPTH(LMU_DEPTH)) u_lmu (
      .clk, .rst_n,
      .ins_valid(u_valid[L0+g]), .ins_ready(u_ready[L0+g]), .ins_data(u_data),
      .o_valid(o_valid[L0+g]), .o_ready(o_ready[L0+g]), .o_data(o_data[L0+g]), .o_dst(o_dst[L0+g]),
      .i_valid(i_valid[L0+g]), .i_ready(i_ready[L0+g]), .i_data(i_data[L0+g]), .i_src(i_src[L0+g]),
      .done(unit_done[L0+g])
    );
  end

  for (genvar g = 0; g < N_MMU_P; g++) begin : g_mmu
    dora_mmu #(.MAX_I(MMU_MAX), .MAX_K(MMU_MAX), .MAX_J(MMU_MAX)) u_mmu (
      .clk, .rst_n,
      .ins_valid(u_valid[M0+g]), .ins_ready(u_ready[M0+g]), .ins_data(u_data),
      .o_valid(o_valid[M0+g]), .o_ready(o_ready[M0+g]), .o_data(o_data[M0+g]), .o_dst(o_dst[M0+g]),
      .i_valid(i_valid[M0+g]), .i_ready(i_ready[M0+g]), .i_data(i_data[M0+g]), .i_src(i_src[M0+g]),
      .done(unit_done[M0+g]), .in_stall(mmu_in_stall[g])
    );
  end

  for (genvar g = 0; g < N_SFU_P; g++) begin : g_sfu
    dora_sfu #(.MAX_ROW(SFU_MAX_ROW)) u_sfu (
      .clk, .rst_n,
      .ins_valid(u_valid[S0+g]), .ins_ready(u_ready[S0+g]), .ins_data(u_data),
      .o_valid(o_valid[S0+g]), .o_ready(o_ready[S0+g]), .o_data(o_data[S0+g]), .o_dst(o_dst[S0+g]),
      .i_valid(i_valid[S0+g]), .i_ready(i_ready[S0+g]), .i_data(i_data[S0+g]), .i_src(i_src[S0+g]),
      .done(unit_done[S0+g])
    );
  end

  dora_fc_network #(.N(N)) u_net (
    .o_valid, .o_data, .o_dst, .o_ready,
    .i_valid, .i_data, .i_ready, .i_src
  );

  always_comb begin
    done = !idu_busy;
    for (int k = 0; k < N; k++) done = done && unit_done[k];
  end
  assign busy = idu_busy || !done;
endmodule
