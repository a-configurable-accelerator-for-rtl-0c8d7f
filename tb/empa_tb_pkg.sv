// empa_tb_pkg: instruction format of the behavioural core used by the
// system testbenches. It is a stand-in for a Y86 core: a handful of register
// instructions, a load, pseudo-register access and the EMPA metainstructions.
// PC values count instructions, not bytes.
package empa_tb_pkg;
  import empa_pkg::*;

  typedef enum logic [2:0] {
    I_NOP, I_IRMOV, I_ADD, I_MRMOV, I_PSRR, I_PSRW, I_META, I_HALT
  } iop_e;

  typedef struct packed {
    iop_e      op;
    logic [2:0] ra;     // IRMOV/MRMOV/PSRR destination, ADD/PSRW source
    logic [2:0] rb;     // ADD destination, MRMOV base address register
    logic      role;    // pseudo register role: 0 parent side, 1 child side
    word_t     imm;
    meta_req_t meta;
  } instr_t;

  function automatic instr_t irmov(int r, word_t v);
    instr_t i = '0; i.op = I_IRMOV; i.ra = 3'(r); i.imm = v; return i;
  endfunction
  function automatic instr_t addl(int ra, int rb);   // r[rb] += r[ra]
    instr_t i = '0; i.op = I_ADD; i.ra = 3'(ra); i.rb = 3'(rb); return i;
  endfunction
  function automatic instr_t mrmov(int ra, int rb);  // r[ra] = mem[r[rb]]
    instr_t i = '0; i.op = I_MRMOV; i.ra = 3'(ra); i.rb = 3'(rb); return i;
  endfunction
  function automatic instr_t psrr(int ra, bit role);
    instr_t i = '0; i.op = I_PSRR; i.ra = 3'(ra); i.role = role; return i;
  endfunction
  function automatic instr_t psrw(int ra, bit role);
    instr_t i = '0; i.op = I_PSRW; i.ra = 3'(ra); i.role = role; return i;
  endfunction
  function automatic instr_t qmeta(meta_op_e op, word_t target, word_t next_pc,
                                  word_t arg = 0, mode_e mode = MODE_NORMAL);
    instr_t i = '0;
    i.op = I_META; i.meta.op = op; i.meta.target = target; i.meta.next_pc = next_pc;
    i.meta.arg = arg; i.meta.mode = mode;
    return i;
  endfunction
endpackage
