// dora_pkg -- shared types and constants of the DORA overlay.
//
// DORA is an instruction-driven overlay: an Instruction Dispatch Unit (IDU)
// streams instructions to a Memory Interface Unit (MIU), Local Memory Units
// (LMUs), Matrix Multiplication Units (MMUs) and Special Function Units
// (SFUs), which exchange data over a fully-connected streaming network.
//
// This package holds the unit numbering, the 32-bit instruction header, the
// per-unit instruction bodies, the op codes and the Q16.16 fixed-point helpers
// used by the MMU and SFU.
//
// From the paper: the unit counts of the main configuration (6 MMUs, 14 LMUs,
// 3 SFUs), the 32-bit header width and the field names of every header and
// body. This design's own choices: the bit positions of every field, the
// dense unit numbering, the extra fields an instruction needs to be executable
// (LMU row length, MIU layer id and dependencies) and Q16.16 fixed point in
// place of FP32.
//
// Unit numbering (des_unit, src_pu, des_pu, network port index):
//   0                          MIU
//   1 .. N_LMU                 LMU0 ..
//   1+N_LMU .. N_LMU+N_MMU     MMU0 ..
//   then                       SFU0 ..
// LMU fields that name an LMU by index (src_lmu, des_lmu) map to unit 1+index.
package dora_pkg;

  parameter int N_LMU   = 14;
  parameter int N_MMU   = 6;
  parameter int N_SFU   = 3;
  parameter int N_UNITS = 1 + N_LMU + N_MMU + N_SFU;

  parameter int DATA_W  = 32;   // one Q16.16 word per stream beat
  parameter int FRAC    = 16;
  parameter int UID_W   = 8;
  parameter int HDR_W   = 32;
  parameter int MAX_BODY = 6;   // longest body (MIU) in 32-bit words

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [UID_W-1:0]  uid_t;

  localparam uid_t UID_MIU = '0;

  function automatic uid_t lmu_uid(input int idx);
    return uid_t'(1 + idx);
  endfunction

  // Instruction header: [31] is_last, [30:27] op_type, [26:19] des_unit,
  // [18:11] valid_length (body words that follow), [10:0] reserved.
  typedef struct packed {
    logic       is_last;
    logic [3:0] op_type;
    logic [7:0] des_unit;
    logic [7:0] valid_length;
    logic [10:0] rsvd;
  } hdr_t;

  // ---------------- op codes (header op_type) ----------------
  localparam logic [3:0] OP_MIU_LOAD  = 4'd0;  // DRAM -> LMU
  localparam logic [3:0] OP_MIU_STORE = 4'd1;  // LMU -> DRAM
  localparam logic [3:0] OP_LMU       = 4'd0;
  localparam logic [3:0] OP_MMU       = 4'd0;
  localparam logic [3:0] OP_SFU_SOFTMAX   = 4'd0;
  localparam logic [3:0] OP_SFU_GELU      = 4'd1;
  localparam logic [3:0] OP_SFU_LAYERNORM = 4'd2;

  // MMU per-bank operation (ping_op / pong_op)
  typedef enum logic [3:0] {
    MMU_NOP      = 4'd0,
    MMU_LOAD_LHS = 4'd1,
    MMU_LOAD_RHS = 4'd2,
    MMU_COMPUTE  = 4'd3,
    MMU_STORE    = 4'd4
  } mmu_op_e;

  // ---------------- instruction bodies ----------------
  // Body word 0 is the first word after the header; it sits in the most
  // significant bits of the struct.

  // MIU, 6 words.
  typedef struct packed {
    logic [31:0] ddr_addr;                 // w0: word address of element (0,0)
    logic [15:0] m;                        // w1: matrix rows in DRAM
    logic [15:0] n;                        //     matrix columns (row pitch)
    logic [15:0] start_row;                // w2
    logic [15:0] end_row;
    logic [15:0] start_col;                // w3
    logic [15:0] end_col;
    logic [7:0]  src_lmu;                  // w4: LMU a store reads from
    logic [7:0]  des_lmu;                  //     LMU a load writes to
    logic [7:0]  layer_id;                 //     layer this transfer belongs to
    logic [4:0]  rsvd0;
    logic        dep1_v;                   //     load waits for layer dep1
    logic        dep0_v;                   //     load waits for layer dep0
    logic        layer_done;               //     store completes layer_id
    logic [7:0]  dep0;                     // w5
    logic [7:0]  dep1;
    logic [15:0] rsvd1;
  } miu_body_t;
  localparam int MIU_BODY_WORDS = 6;

  // LMU, 4 words.
  typedef struct packed {
    logic        ping_buf;                 // w0: bank written by the load
    logic        pong_buf;                 //     bank read by the send
    logic        load_op;
    logic        send_op;
    logic [3:0]  rsvd0;
    logic [7:0]  src_pu;                   //     unit the load takes data from
    logic [7:0]  des_pu;                   //     unit the send delivers to
    logic [7:0]  rsvd1;
    logic [15:0] count;                    // w1: times the send rectangle repeats
    logic [15:0] row_len;                  //     tile row length (flexible shape)
    logic [15:0] start_row;                // w2
    logic [15:0] end_row;
    logic [15:0] start_col;                // w3
    logic [15:0] end_col;
  } lmu_body_t;
  localparam int LMU_BODY_WORDS = 4;

  // MMU, 2 words.
  typedef struct packed {
    logic [3:0]  ping_op;                  // w0: mmu_op_e for the ping bank
    logic [3:0]  pong_op;                  //     mmu_op_e for the pong bank
    logic [7:0]  src_lmu;
    logic [7:0]  des_lmu;
    logic [7:0]  rsvd0;
    logic [7:0]  bound_i;                  // w1: loop bounds of Fig. 4(b)
    logic [7:0]  bound_k;
    logic [7:0]  bound_j;
    logic [7:0]  rsvd1;
  } mmu_body_t;
  localparam int MMU_BODY_WORDS = 2;

  // SFU, 2 words.
  typedef struct packed {
    logic [7:0]  src_lmu;                  // w0
    logic [7:0]  des_lmu;
    logic [7:0]  src_num;                  //     LMUs a row is gathered from (0 = 1)
    logic [7:0]  des_num;                  //     LMUs a result row is split over (0 = 1)
    logic [15:0] count;                    // w1: rows to process
    logic [15:0] ele_num;                  //     elements per row
  } sfu_body_t;
  localparam int SFU_BODY_WORDS = 2;

  // ---------------- Q16.16 helpers ----------------
  localparam logic signed [31:0] Q_ONE = 32'sd65536;

  function automatic logic signed [31:0] q_mul(input logic signed [31:0] a,
                                               input logic signed [31:0] b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return 32'(p >>> FRAC);
  endfunction

  // a / b in Q16.16; b must be non-zero.
  function automatic logic signed [31:0] q_div(input logic signed [31:0] a,
                                               input logic signed [31:0] b);
    logic signed [63:0] num;
    num = 64'(a) <<< FRAC;
    return 32'(num / 64'(b));
  endfunction

  // exp(x) for x <= 0: exp(x) = 2^t, t = x*log2(e) = n + f with f in [0,1);
  // 2^f is approximated by 1 + f*(0.6565 + 0.3435*f).
  function automatic logic signed [31:0] q_exp_neg(input logic signed [31:0] x);
    logic signed [63:0] t;
    logic signed [31:0] n;
    logic [31:0] f, p, sh;
    t  = (64'(x) * 64'sd94548) >>> FRAC;    // 94548 = log2(e) in Q16.16
    n  = 32'(t >>> FRAC);                   // floor
    f  = 32'(t) & 32'h0000_FFFF;
    p  = 32'd65536 + ((f * (32'd43025 + ((f * 32'd22511) >> 16))) >> 16);
    sh = 32'(-n);
    if (n > 0) return Q_ONE;                // only for x > 0, not used
    if (sh >= 32'd31) return '0;
    return 32'(p >> sh);
  endfunction

  // floor(sqrt(v)) of an unsigned 64-bit value, bit by bit.
  function automatic logic [31:0] isqrt64(input logic [63:0] v);
    logic [63:0] rem, root, trial;
    rem = v; root = '0;
    for (int i = 31; i >= 0; i--) begin
      trial = root + (64'd1 << (2*i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) + (64'd1 << (2*i));
      end else begin
        root = root >> 1;
      end
    end
    return 32'(root);
  endfunction

  // sqrt of a non-negative Q16.16 value.
  function automatic logic signed [31:0] q_sqrt(input logic signed [31:0] v);
    return $signed(isqrt64(64'($unsigned(v)) << FRAC));
  endfunction

endpackage
