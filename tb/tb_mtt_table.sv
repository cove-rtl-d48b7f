// tb_mtt_table: self-checking test of the Memory Tracking Table.
//
// A reference bit array in the testbench mirrors the table. Writes are issued
// from every combination of qualifier, privilege and V, with and without TSM
// delegation, inside and outside the tracked window; the testbench decides
// independently whether each write must be accepted, checks wr_ack/wr_err one
// cycle later and then compares lookups on all read ports with the model.
module tb_mtt_table;
  import cove_pkg::*;

  localparam int unsigned NRD   = 3;
  localparam int unsigned PAGES = 256;
  localparam logic [PPN_WIDTH-1:0] BASE = PPN_WIDTH'('h80000);

  logic clk = 0, rst_n = 0;
  logic [PPN_WIDTH-1:0] rd_ppn [NRD];
  logic                 rd_c   [NRD];
  logic wr_valid, wr_c, wr_qual, wr_v, wr_ack, wr_err;
  logic [PPN_WIDTH-1:0] wr_ppn;
  priv_e wr_priv, deleg_priv;
  logic deleg_valid, deleg_val, deleg_qual, tsm_deleg;
  int checks = 0, failures = 0;
  logic model [PAGES];
  logic m_deleg;

  mtt_table #(.NUM_RD(NRD), .MTT_PAGES(PAGES), .MTT_BASE_PPN(BASE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PPN_WIDTH-1:0] rand_ppn();
    int unsigned r = $urandom % 10;
    if (r == 0) return BASE - 1 - PPN_WIDTH'($urandom % 4);
    if (r == 1) return BASE + PAGES + PPN_WIDTH'($urandom % 4);
    return BASE + PPN_WIDTH'($urandom % PAGES);
  endfunction

  function automatic logic model_c(logic [PPN_WIDTH-1:0] p);
    if (p < BASE || p >= BASE + PAGES) return 1'b0;
    return model[int'(p - BASE)];
  endfunction

  task automatic check_reads();
    for (int i = 0; i < NRD; i++) rd_ppn[i] = rand_ppn();
    #1;
    for (int i = 0; i < NRD; i++) begin
      checks++;
      if (rd_c[i] !== model_c(rd_ppn[i])) begin
        failures++;
        if (failures < 10) $display("read port %0d ppn %h: got %0b want %0b",
                                    i, rd_ppn[i], rd_c[i], model_c(rd_ppn[i]));
      end
    end
  endtask

  task automatic do_write(logic [PPN_WIDTH-1:0] p, logic c, logic q, priv_e pr, logic vv);
    logic ok;
    ok = q && (pr == PRIV_M || (pr == PRIV_S && !vv && m_deleg)) &&
         p >= BASE && p < BASE + PAGES;
    wr_valid = 1; wr_ppn = p; wr_c = c; wr_qual = q; wr_priv = pr; wr_v = vv;
    @(posedge clk); #1;
    wr_valid = 0;
    checks++;
    if (wr_ack !== 1'b1 || wr_err !== !ok) begin
      failures++;
      if (failures < 10) $display("write ppn %h q%0b priv %0d v%0b: ack %0b err %0b want err %0b",
                                  p, q, pr, vv, wr_ack, wr_err, !ok);
    end
    if (ok) model[int'(p - BASE)] = c;
  endtask

  task automatic do_deleg(logic val, logic q, priv_e pr);
    deleg_valid = 1; deleg_val = val; deleg_qual = q; deleg_priv = pr;
    @(posedge clk); #1;
    deleg_valid = 0;
    if (q && pr == PRIV_M) m_deleg = val;
    checks++;
    if (tsm_deleg !== m_deleg) failures++;
  endtask

  initial begin
    wr_valid = 0; deleg_valid = 0; wr_ppn = '0; wr_c = 0; wr_qual = 0;
    wr_priv = PRIV_U; wr_v = 0; deleg_val = 0; deleg_qual = 0; deleg_priv = PRIV_U;
    for (int i = 0; i < PAGES; i++) model[i] = 1'b0;
    for (int i = 0; i < NRD; i++) rd_ppn[i] = BASE;
    m_deleg = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    // after reset everything is non-confidential
    for (int i = 0; i < 50; i++) check_reads();
    // host (HS, no qualifier) cannot convert memory
    do_write(BASE + 5, 1, 0, PRIV_S, 0);
    // TSM without delegation cannot either
    do_write(BASE + 5, 1, 1, PRIV_S, 0);
    // TSM-driver can
    do_write(BASE + 5, 1, 1, PRIV_M, 0);
    rd_ppn[0] = BASE + 5; #1; checks++; if (rd_c[0] !== 1'b1) failures++;
    // delegation from a non-confidential M-mode is ignored
    do_deleg(1, 0, PRIV_M);
    do_deleg(1, 1, PRIV_S);
    do_deleg(1, 1, PRIV_M);
    do_write(BASE + 6, 1, 1, PRIV_S, 0);
    rd_ppn[1] = BASE + 6; #1; checks++; if (rd_c[1] !== 1'b1) failures++;
    // a TVM (VS with qualifier) cannot write even when delegated
    do_write(BASE + 6, 0, 1, PRIV_S, 1);
    // random mix
    for (int i = 0; i < 3000; i++) begin
      if ($urandom % 40 == 0) do_deleg(1'($urandom), 1'($urandom), priv_e'($urandom_range(0, 3)));
      do_write(rand_ppn(), 1'($urandom), ($urandom % 4) != 0,
               priv_e'($urandom_range(0, 3)), ($urandom % 3) == 0);
      check_reads();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
