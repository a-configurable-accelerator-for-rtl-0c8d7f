// empa_core_model: behavioural stand-in for one processing core, for
// testbenches only. Executes one instruction per clock while Enable is high.
// At a metainstruction it raises Meta with the request and holds it until the
// supervisor acknowledges; the supervisor supplies the next PC. Register-file
// cloning, PC loads and %eax write-backs from the supervisor take priority
// over execution. Data memory is a read-only word array addressed in bytes.
module empa_core_model
  import empa_pkg::*;
  import empa_tb_pkg::*;
#(
  parameter int unsigned PLEN = 128,
  parameter int unsigned DLEN = 1024
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  word_t     reset_pc_i,
  input  instr_t    prog_i [PLEN],
  input  word_t     dmem_i [DLEN],
  input  logic      enable_i,
  input  logic      pc_load_i,
  input  word_t     pc_i,
  input  logic      rf_load_i,
  input  word_t     rf_i [NREGS],
  input  logic      reg_wr_i,
  input  word_t     reg_data_i,
  input  logic      meta_ack_i,
  input  word_t     psr_rdata_i,
  output logic      meta_valid_o,
  output meta_req_t meta_req_o,
  output word_t     rf_o [NREGS],
  output logic      psr_we_o,
  output logic      psr_role_o,
  output word_t     psr_wdata_o,
  output word_t     pc_o,
  output int        retired_o
);

  word_t  pc;
  word_t  regs [NREGS];
  instr_t ins;

  assign ins          = prog_i[pc % PLEN];
  assign meta_valid_o = enable_i && ins.op == I_META;
  assign meta_req_o   = ins.meta;
  assign psr_role_o   = ins.role;
  assign psr_we_o     = enable_i && ins.op == I_PSRW;
  assign psr_wdata_o  = regs[ins.ra];
  assign rf_o         = regs;
  assign pc_o         = pc;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc        <= reset_pc_i;
      retired_o <= 0;
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (enable_i && ins.op != I_META && ins.op != I_HALT) begin
        pc        <= pc + 1;
        retired_o <= retired_o + 1;
        unique case (ins.op)
          I_IRMOV: regs[ins.ra] <= ins.imm;
          I_ADD:   regs[ins.rb] <= regs[ins.rb] + regs[ins.ra];
          I_MRMOV: regs[ins.ra] <= dmem_i[(regs[ins.rb] / WORD_BYTES) % DLEN];
          I_PSRR:  regs[ins.ra] <= psr_rdata_i;
          default: ;
        endcase
      end
      if (meta_ack_i) retired_o <= retired_o + 1;
      if (rf_load_i) regs <= rf_i;
      if (reg_wr_i)  regs[LINK_REG] <= reg_data_i;
      if (pc_load_i) pc <= pc_i;
    end
  end

endmodule
