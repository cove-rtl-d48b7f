// tb_hart_conf_qualifier: self-checking test of the Confidential qualifier.
//
// Random sequences of privilege, V and TEECALL/TEERET pulses are applied; a
// reference model in the testbench tracks the qualifier (set/cleared only in
// M-mode) and the expected mode/translation decode, and every cycle's outputs
// are compared with it. A directed part first checks each row of the mode
// table.
module tb_hart_conf_qualifier;
  import cove_pkg::*;

  logic  clk = 0, rst_n = 0;
  priv_e priv;
  logic  v, teecall, teeret;
  logic  conf, mtt_en, call_err;
  mode_e mode;
  xlat_e xlat;
  int    checks = 0, failures = 0;
  logic  m_conf, m_err;

  hart_conf_qualifier dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void expect_decode(logic c, priv_e p, logic vv,
                                        output mode_e em, output xlat_e ex,
                                        output logic een);
    een = 1'b1;
    if (p == PRIV_M)      begin em = MODE_M; ex = XLAT_BARE; een = 1'b0; end
    else if (p == PRIV_R) begin em = MODE_BAD; ex = XLAT_BARE; end
    else if (vv) begin
      ex = XLAT_TWO;
      em = (p == PRIV_S) ? (c ? MODE_CVS : MODE_VS) : (c ? MODE_CVU : MODE_VU);
    end else begin
      ex = XLAT_SINGLE;
      em = (p == PRIV_S) ? (c ? MODE_CHS : MODE_HS) : (c ? MODE_CU : MODE_U);
    end
  endfunction

  task automatic check_now();
    mode_e em; xlat_e ex; logic een;
    expect_decode(m_conf, priv, v, em, ex, een);
    checks++;
    if (conf !== m_conf || mode !== em || xlat !== ex || mtt_en !== een ||
        call_err !== m_err) begin
      failures++;
      if (failures < 10)
        $display("mismatch priv=%0d v=%0b: conf %0b/%0b mode %0d/%0d xlat %0d/%0d en %0b/%0b err %0b/%0b",
                 priv, v, conf, m_conf, mode, em, xlat, ex, mtt_en, een, call_err, m_err);
    end
  endtask

  task automatic step(priv_e p, logic vv, logic call, logic ret);
    priv = p; v = vv; teecall = call; teeret = ret;
    @(posedge clk);
    m_err = (call || ret) && (p != PRIV_M);
    if (p == PRIV_M) begin
      if (call) m_conf = 1'b1;
      else if (ret) m_conf = 1'b0;
    end
    #1;
    teecall = 0; teeret = 0;
    check_now();
  endtask

  initial begin
    priv = PRIV_M; v = 0; teecall = 0; teeret = 0;
    m_conf = 0; m_err = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check_now();
    // Table rows with C=0
    step(PRIV_U, 0, 0, 0);
    if (mode !== MODE_U || xlat !== XLAT_SINGLE) begin failures++; end checks++;
    step(PRIV_S, 0, 0, 0);
    step(PRIV_U, 1, 0, 0);
    if (mode !== MODE_VU || xlat !== XLAT_TWO) begin failures++; end checks++;
    step(PRIV_S, 1, 0, 0);
    // TEECALL from VS-mode is refused
    step(PRIV_S, 1, 1, 0);
    if (conf !== 1'b0 || call_err !== 1'b1) begin failures++; end checks++;
    // TEECALL from M-mode (TSM-driver) sets the qualifier
    step(PRIV_M, 0, 1, 0);
    if (conf !== 1'b1 || mtt_en !== 1'b0) begin failures++; end checks++;
    step(PRIV_S, 1, 0, 0);
    if (mode !== MODE_CVS) begin failures++; end checks++;
    step(PRIV_U, 1, 0, 0);
    if (mode !== MODE_CVU) begin failures++; end checks++;
    step(PRIV_S, 0, 0, 0);
    if (mode !== MODE_CHS) begin failures++; end checks++;
    // TEERET from the TVM is refused, from M-mode accepted
    step(PRIV_S, 1, 0, 1);
    if (conf !== 1'b1) begin failures++; end checks++;
    step(PRIV_M, 0, 0, 1);
    if (conf !== 1'b0) begin failures++; end checks++;
    // random
    for (int i = 0; i < 5000; i++) begin
      step(priv_e'($urandom_range(0, 3)), 1'($urandom), ($urandom % 5) == 0,
           ($urandom % 5) == 0);
    end
    // reset clears the qualifier
    step(PRIV_M, 0, 1, 0);
    rst_n = 0; #1; m_conf = 0; m_err = 0;
    check_now();
    rst_n = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
