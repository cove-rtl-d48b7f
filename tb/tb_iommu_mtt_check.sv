// tb_iommu_mtt_check: self-checking test of the IOMMU's MTT check.
//
// The testbench plays the MTT (page confidential when bit 0 of the PPN is 1)
// and keeps its own copy of the RID binding table. It programs bindings with
// and without the Confidential qualifier, then sends random DMA: ordinary DMA
// to C and NC pages, confidential DMA from bound and unbound RIDs. Forwarding,
// fabric tags, refusal flags and the fault record (RID, PASID) are checked.
module tb_iommu_mtt_check;
  import cove_pkg::*;

  localparam int unsigned NT = 4;
  logic clk = 0, rst_n = 0;
  logic dma_valid, dma_ready, flt_valid, mtt_c, fab_valid, fab_ready;
  dma_req_t dma;
  logic [RID_WIDTH-1:0] flt_rid, tdi_wr_rid;
  logic [PASID_WIDTH-1:0] flt_pasid;
  logic [PPN_WIDTH-1:0] mtt_ppn;
  logic tdi_wr_valid, tdi_wr_en, tdi_wr_qual, tdi_err;
  logic [$clog2(NT)-1:0] tdi_wr_idx;
  fab_req_t fab_req;
  int checks = 0, failures = 0;
  logic [RID_WIDTH-1:0] m_rid [NT];
  logic [NT-1:0] m_en;
  int n_nc_to_c = 0, n_unbound = 0, n_conf_ok = 0, n_nc_ok = 0;

  iommu_mtt_check #(.NUM_TDI(NT)) dut (.*);

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

  function automatic logic bound(logic [RID_WIDTH-1:0] r);
    for (int i = 0; i < NT; i++) if (m_en[i] && m_rid[i] == r) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    logic c, exp_fault, e_err;
    dma_valid = 0; dma = '0; fab_ready = 1;
    tdi_wr_valid = 0; tdi_wr_en = 0; tdi_wr_qual = 0; tdi_wr_idx = 0; tdi_wr_rid = 0;
    m_en = '0;
    for (int i = 0; i < NT; i++) m_rid[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int i = 0; i < 20000; i++) begin
      tdi_wr_valid = ($urandom % 10) == 0;
      tdi_wr_idx   = $clog2(NT)'($urandom);
      tdi_wr_rid   = RID_WIDTH'($urandom_range(0, 7));
      tdi_wr_en    = ($urandom % 4) != 0;
      tdi_wr_qual  = ($urandom % 3) != 0;
      dma_valid    = ($urandom % 4) != 0;
      dma.rid      = RID_WIDTH'($urandom_range(0, 7));
      dma.pasid    = PASID_WIDTH'($urandom);
      dma.addr     = {$urandom, $urandom};
      dma.conf     = 1'($urandom);
      dma.we       = 1'($urandom);
      dma.wdata    = {$urandom, $urandom};
      fab_ready    = ($urandom % 3) != 0;
      #1;
      c = dma.addr[PAGE_SHIFT];
      exp_fault = dma.conf ? !bound(dma.rid) : c;
      e_err = tdi_wr_valid && !tdi_wr_qual;
      checks++;
      if (fab_valid !== (dma_valid && !exp_fault)) fail("fab_valid");
      checks++;
      if (dma_ready !== (exp_fault ? 1'b1 : fab_ready)) fail("dma_ready");
      if (fab_valid) begin
        checks++;
        if (fab_req.pa !== dma.addr || fab_req.we !== dma.we || fab_req.wdata !== dma.wdata ||
            fab_req.qual !== dma.conf || fab_req.dom_c !== c) fail("fabric fields");
      end
      if (dma_valid) begin
        if (exp_fault && !dma.conf) n_nc_to_c++;
        if (exp_fault && dma.conf) n_unbound++;
        if (!exp_fault && dma.conf) n_conf_ok++;
        if (!exp_fault && !dma.conf) n_nc_ok++;
      end
      @(posedge clk);
      if (tdi_wr_valid && tdi_wr_qual) begin
        m_rid[tdi_wr_idx] = tdi_wr_rid;
        m_en[tdi_wr_idx]  = tdi_wr_en;
      end
      #1;
      checks++;
      if (flt_valid !== (dma_valid && exp_fault) || tdi_err !== e_err) fail("flt_valid/tdi_err");
      if (dma_valid && exp_fault) begin
        checks++;
        if (flt_rid !== dma.rid || flt_pasid !== dma.pasid) fail("fault record");
      end
    end
    $display("non-conf DMA to C %0d, conf DMA from unbound RID %0d, conf DMA ok %0d, non-conf ok %0d",
             n_nc_to_c, n_unbound, n_conf_ok, n_nc_ok);
    checks++;
    if (n_nc_to_c == 0 || n_unbound == 0 || n_conf_ok == 0 || n_nc_ok == 0) fail("case not covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
