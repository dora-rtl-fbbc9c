// tb_util_pkg -- helpers shared by the DORA testbenches: building
// instruction headers and splitting instruction bodies into 32-bit words,
// plus Q16.16 <-> real conversion for reference models.
package tb_util_pkg;
  import dora_pkg::*;

  function automatic logic [31:0] mk_hdr(input bit last, input int op,
                                         input int des, input int len);
    hdr_t h;
    h = '0;
    h.is_last      = last;
    h.op_type      = 4'(op);
    h.des_unit     = 8'(des);
    h.valid_length = 8'(len);
    return 32'(h);
  endfunction

  function automatic logic [31:0] miu_word(input miu_body_t b, input int w);
    logic [MIU_BODY_WORDS*32-1:0] v;
    v = b;
    return v[(MIU_BODY_WORDS-1-w)*32 +: 32];
  endfunction
  function automatic logic [31:0] lmu_word(input lmu_body_t b, input int w);
    logic [LMU_BODY_WORDS*32-1:0] v;
    v = b;
    return v[(LMU_BODY_WORDS-1-w)*32 +: 32];
  endfunction
  function automatic logic [31:0] mmu_word(input mmu_body_t b, input int w);
    logic [MMU_BODY_WORDS*32-1:0] v;
    v = b;
    return v[(MMU_BODY_WORDS-1-w)*32 +: 32];
  endfunction
  function automatic logic [31:0] sfu_word(input sfu_body_t b, input int w);
    logic [SFU_BODY_WORDS*32-1:0] v;
    v = b;
    return v[(SFU_BODY_WORDS-1-w)*32 +: 32];
  endfunction

  function automatic real q2r(input logic [31:0] q);
    return real'($signed(q)) / 65536.0;
  endfunction
  function automatic logic [31:0] r2q(input real r);
    return 32'($rtoi(r * 65536.0));
  endfunction
endpackage
