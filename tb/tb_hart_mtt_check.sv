// tb_hart_mtt_check: self-checking test of the hart MMU's MTT check.
//
// The testbench plays the MTT (it answers mtt_c itself from a page-parity
// rule it knows) and the fabric (random ready). For every combination of
// qualifier, MTT enable, access type, page-walk flag and page domain it
// computes the expected fault from the enforcement rule
//   fault = (~conf & C) | (conf & (fetch | page-walk) & NC)   (when enabled)
// and checks forwarding, handshake, fabric tags and the fault cause reported
// one cycle later. It also counts each of the fault kinds seen.
module tb_hart_mtt_check;
  import cove_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, conf, mtt_en, flt_valid, mtt_c, fab_valid, fab_ready;
  hart_req_t req;
  logic [4:0] flt_cause;
  logic [PPN_WIDTH-1:0] mtt_ppn;
  fab_req_t fab_req;
  int checks = 0, failures = 0;
  int n_nc_to_c = 0, n_fetch_nc = 0, n_ptw_nc = 0, n_pass = 0;

  hart_mtt_check dut (.*);

  // MTT stand-in: a page is confidential when bit 0 of its PPN is 1.
  assign mtt_c = mtt_ppn[0];

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL: %s", msg);
  endtask

  initial begin
    logic exp_fault, c, prev_fault;
    logic [4:0] prev_cause;
    req_valid = 0; req = '0; conf = 0; mtt_en = 1; fab_ready = 1;
    prev_fault = 0; prev_cause = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int i = 0; i < 20000; i++) begin
      req_valid = ($urandom % 4) != 0;
      req.pa    = {$urandom, $urandom};
      req.acc   = acc_e'($urandom_range(0, 2));
      req.ptw   = ($urandom % 4) == 0;
      req.wdata = {$urandom, $urandom};
      conf      = 1'($urandom);
      mtt_en    = ($urandom % 6) != 0;
      fab_ready = ($urandom % 3) != 0;
      #1;
      c = req.pa[PAGE_SHIFT];
      exp_fault = mtt_en && ((!conf && c) || (conf && (req.acc == ACC_FETCH || req.ptw) && !c));
      checks++;
      if (mtt_ppn !== req.pa[PA_WIDTH-1:PAGE_SHIFT]) fail("lookup ppn");
      checks++;
      if (fab_valid !== (req_valid && !exp_fault)) fail($sformatf("fab_valid conf=%0b c=%0b acc=%0d ptw=%0b en=%0b",
                                                                  conf, c, req.acc, req.ptw, mtt_en));
      checks++;
      if (req_ready !== (exp_fault ? 1'b1 : fab_ready)) fail("req_ready");
      if (fab_valid) begin
        checks++;
        if (fab_req.pa !== req.pa || fab_req.qual !== conf || fab_req.dom_c !== c ||
            fab_req.we !== (req.acc == ACC_STORE && !req.ptw) || fab_req.wdata !== req.wdata)
          fail("fabric request fields");
      end
      if (req_valid && exp_fault) begin
        if (!conf) n_nc_to_c++;
        else if (req.ptw) n_ptw_nc++;
        else n_fetch_nc++;
      end
      if (req_valid && !exp_fault && fab_ready) n_pass++;
      @(posedge clk);
      #1;
      checks++;
      if (flt_valid !== (req_valid && exp_fault)) fail("flt_valid");
      if (req_valid && exp_fault) begin
        checks++;
        if (flt_cause !== (req.acc == ACC_FETCH ? 5'd1 : req.acc == ACC_STORE ? 5'd7 : 5'd5))
          fail($sformatf("cause %0d for acc %0d", flt_cause, req.acc));
      end
    end
    $display("faults: non-conf->C %0d, conf fetch->NC %0d, conf walk->NC %0d; passed %0d",
             n_nc_to_c, n_fetch_nc, n_ptw_nc, n_pass);
    checks++;
    if (n_nc_to_c == 0 || n_fetch_nc == 0 || n_ptw_nc == 0 || n_pass == 0) fail("case not covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
