// intfile_guard: confidential guest interrupt files of one hart.
//
// The RISC-V Advanced Interrupt Architecture gives each hart a set of guest
// (VS-level) interrupt files. CoVE reserves some of them for TVMs: a file
// marked TEE-assigned may be accessed only while the hart is in
// Confidential-mode. Any other access to it raises an illegal-instruction
// exception when the hart runs with V=0 and a virtual-instruction exception
// when it runs with V=1. Files not assigned to the TEE behave as usual. The
// interrupt delivery model is unchanged and not part of this block.
//
// Assignment: a request on asg_* marks (asg_tee=1) or releases (asg_tee=0)
// one file. Because the assignment is part of the trusted configuration, it is
// accepted only from a requester holding the Confidential qualifier (the TSM
// or the TSM-driver); other requests are refused and flagged on asg_err one
// cycle later.
//
// Access check: acc_valid with the file index, the hart's qualifier and V is
// answered one cycle later on chk_valid, with chk_exc and the RISC-V cause
// number when the access must trap. Reset releases every file.
module intfile_guard
  import cove_pkg::*;
#(
  parameter int unsigned NUM_FILES = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // assignment of files to the TEE
  input  logic                         asg_valid,
  input  logic [$clog2(NUM_FILES)-1:0] asg_file,
  input  logic                         asg_tee,
  input  logic                         asg_qual,
  output logic                         asg_err,
  // access check
  input  logic                         acc_valid,
  input  logic [$clog2(NUM_FILES)-1:0] acc_file,
  input  logic                         acc_qual,
  input  logic                         acc_v,
  output logic                         chk_valid,
  output logic                         chk_exc,
  output logic [4:0]                   chk_cause,
  output logic [NUM_FILES-1:0]         tee_files
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tee_files <= '0;
      asg_err   <= 1'b0;
      chk_valid <= 1'b0;
      chk_exc   <= 1'b0;
      chk_cause <= '0;
    end else begin
      asg_err <= asg_valid && !asg_qual;
      if (asg_valid && asg_qual) tee_files[asg_file] <= asg_tee;

      chk_valid <= acc_valid;
      chk_exc   <= 1'b0;
      chk_cause <= '0;
      if (acc_valid && tee_files[acc_file] && !acc_qual) begin
        chk_exc   <= 1'b1;
        chk_cause <= acc_v ? CAUSE_VIRTUAL_INSN : CAUSE_ILLEGAL_INSN;
      end
    end
  end

endmodule
