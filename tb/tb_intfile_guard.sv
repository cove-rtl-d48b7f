// tb_intfile_guard: self-checking test of the confidential interrupt-file
// guard. A reference array of TEE-assigned files is kept in the testbench;
// random assignments (with and without the Confidential qualifier) and random
// accesses (any qualifier, V=0/1) are applied and the refusal flag, the trap
// decision and the cause (2 illegal instruction, 22 virtual instruction) are
// compared one cycle later.
module tb_intfile_guard;
  import cove_pkg::*;

  localparam int unsigned NF = 8;
  logic clk = 0, rst_n = 0;
  logic asg_valid, asg_tee, asg_qual, asg_err;
  logic [$clog2(NF)-1:0] asg_file, acc_file;
  logic acc_valid, acc_qual, acc_v, chk_valid, chk_exc;
  logic [4:0] chk_cause;
  logic [NF-1:0] tee_files;
  int checks = 0, failures = 0;
  logic [NF-1:0] model;
  int n_ill = 0, n_virt = 0, n_ok_tee = 0;

  intfile_guard #(.NUM_FILES(NF)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic e_exc; logic [4:0] e_cause; logic e_err;
    asg_valid = 0; asg_tee = 0; asg_qual = 0; asg_file = 0;
    acc_valid = 0; acc_qual = 0; acc_v = 0; acc_file = 0;
    model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int i = 0; i < 20000; i++) begin
      asg_valid = ($urandom % 3) == 0;
      asg_file  = $clog2(NF)'($urandom);
      asg_tee   = 1'($urandom);
      asg_qual  = ($urandom % 4) != 0;
      acc_valid = 1'($urandom);
      acc_file  = $clog2(NF)'($urandom);
      acc_qual  = 1'($urandom);
      acc_v     = 1'($urandom);
      e_exc   = acc_valid && model[acc_file] && !acc_qual;
      e_cause = e_exc ? (acc_v ? 5'd22 : 5'd2) : 5'd0;
      e_err   = asg_valid && !asg_qual;
      if (e_exc && acc_v) n_virt++;
      if (e_exc && !acc_v) n_ill++;
      if (acc_valid && model[acc_file] && acc_qual) n_ok_tee++;
      @(posedge clk);
      if (asg_valid && asg_qual) model[asg_file] = asg_tee;
      #1;
      checks++;
      if (chk_valid !== acc_valid || chk_exc !== e_exc || chk_cause !== e_cause ||
          asg_err !== e_err || tee_files !== model) begin
        failures++;
        if (failures < 10) $display("cycle %0d: exc %0b/%0b cause %0d/%0d err %0b/%0b files %b/%b",
                                    i, chk_exc, e_exc, chk_cause, e_cause, asg_err, e_err, tee_files, model);
      end
    end
    checks++;
    if (n_ill == 0 || n_virt == 0 || n_ok_tee == 0) failures++;
    $display("illegal-instruction traps %0d, virtual-instruction traps %0d, confidential accesses %0d",
             n_ill, n_virt, n_ok_tee);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
