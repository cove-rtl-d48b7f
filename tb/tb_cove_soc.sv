// tb_cove_soc: end-to-end test of the CoVE SoC hardware at its default size
// (two harts, 4096 tracked pages, 8 guest interrupt files per hart, 4 RID
// bindings).
//
// The memory behind the memory channel is a behavioural model of an encrypted
// DRAM: data are stored XORed with a per-key pad chosen by mem_key_id and
// returned after two cycles; mem_ready is random, so the fabric sees
// back-pressure. Hart 0 plays the host hypervisor, hart 1 the TSM-driver,
// the TSM and a TVM in turn, and a device issues DMA through the IOMMU port.
//
// The scenario walks through the life of a TVM: TEECALL, conversion of pages
// to confidential by the TSM-driver, delegation to the TSM and a delegated
// conversion, TVM stores/loads/fetches in confidential memory and loads from
// shared memory, the faults of the MTT rule, the host's failed attempts, the
// M-mode bypass, confidential interrupt files, TEE-bound and unbound DMA,
// contention between harts and DMA, TEERET, and reclamation of a page. Every
// result is compared with values the testbench works out itself, and every
// mechanism is counted; one that never happened counts as a failure.
module tb_cove_soc;
  import cove_pkg::*;

  localparam int unsigned NH = 2;
  localparam logic [PPN_WIDTH-1:0] BASE = PPN_WIDTH'('h80000);

  logic clk = 0, rst_n = 0;
  priv_e hart_priv [NH];
  logic hart_v [NH], hart_teecall [NH], hart_teeret [NH], hart_conf [NH], hart_call_err [NH];
  mode_e hart_mode [NH];
  xlat_e hart_xlat [NH];
  logic hart_req_valid [NH], hart_req_ready [NH], hart_flt_valid [NH], hart_rsp_valid [NH];
  hart_req_t hart_req [NH];
  logic [4:0] hart_flt_cause [NH];
  logic [DATA_WIDTH-1:0] rsp_rdata;
  logic mtt_wr_valid, mtt_wr_c, mtt_wr_ack, mtt_wr_err;
  logic [0:0] mtt_wr_hart, mtt_deleg_hart, tdi_wr_hart;
  logic [PPN_WIDTH-1:0] mtt_wr_ppn;
  logic mtt_deleg_valid, mtt_deleg_val, tsm_deleg;
  logic if_asg_valid [NH], if_asg_tee [NH], if_asg_err [NH], if_acc_valid [NH];
  logic [2:0] if_asg_file [NH], if_acc_file [NH];
  logic if_chk_valid [NH], if_chk_exc [NH];
  logic [4:0] if_chk_cause [NH];
  logic [7:0] if_tee_files [NH];
  logic dma_valid, dma_ready, dma_flt_valid, dma_rsp_valid;
  dma_req_t dma;
  logic [RID_WIDTH-1:0] dma_flt_rid, tdi_wr_rid;
  logic [PASID_WIDTH-1:0] dma_flt_pasid;
  logic tdi_wr_valid, tdi_wr_en, tdi_err;
  logic [1:0] tdi_wr_idx;
  logic mem_valid, mem_ready, mem_we, mem_key_id, mem_rsp_valid;
  logic [PA_WIDTH-1:0] mem_pa;
  logic [DATA_WIDTH-1:0] mem_wdata, mem_rsp_rdata;
  logic [1:0] mem_src, mem_rsp_src;

  cove_soc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
  endtask

  task automatic expect_eq(string what, logic [63:0] got, logic [63:0] want);
    checks++;
    if (got !== want) fail($sformatf("%s: got %h want %h", what, got, want));
  endtask

  // ---------------- mechanism counters ----------------
  int n_teecall = 0, n_teeret = 0, n_call_err = 0;
  int n_mtt_ok = 0, n_mtt_refused = 0, n_deleg_write = 0;
  int n_f_nc_to_c = 0, n_f_fetch_nc = 0, n_f_walk_nc = 0, n_m_bypass = 0;
  int n_shared_ld = 0, n_if_ill = 0, n_if_virt = 0, n_if_refused = 0;
  int n_dma_nc_c = 0, n_dma_unbound = 0, n_dma_conf_ok = 0, n_tdi_err = 0;
  int n_contend = 0, n_stall = 0, n_key [2] = '{0, 0};

  always @(posedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int p = 0; p < NH + 1; p++) if (dut.p_valid[p]) nv++;
    if (nv > 1) n_contend++;
    if (mem_valid && !mem_ready) n_stall++;
    if (mem_valid && mem_ready) n_key[mem_key_id]++;
  end

  // ---------------- encrypted memory model ----------------
  localparam logic [63:0] PAD0 = 64'h0F1E_2D3C_4B5A_6978;
  localparam logic [63:0] PAD1 = 64'hC3A5_5A3C_9966_F00F;
  logic [63:0] dram [logic [PA_WIDTH-4:0]];
  typedef struct { int due; logic [1:0] src; logic [63:0] data; } mrsp_t;
  mrsp_t rq [$];

  function automatic logic [63:0] pad(logic k);
    return k ? PAD1 : PAD0;
  endfunction

  initial begin
    mem_ready = 0; mem_rsp_valid = 0; mem_rsp_src = 0; mem_rsp_rdata = 0;
    forever begin
      logic acc, we, key; logic [1:0] src; logic [PA_WIDTH-1:0] pa; logic [63:0] wd;
      mrsp_t r;
      @(posedge clk);
      acc = mem_valid && mem_ready; we = mem_we; key = mem_key_id; src = mem_src;
      pa = mem_pa; wd = mem_wdata;
      #1;
      if (acc) begin
        r.due = cycles + 2; r.src = src; r.data = '0;
        if (we) dram[pa[PA_WIDTH-1:3]] = wd ^ pad(key);
        else if (dram.exists(pa[PA_WIDTH-1:3])) r.data = dram[pa[PA_WIDTH-1:3]] ^ pad(key);
        rq.push_back(r);
      end
      mem_rsp_valid = 0;
      if (rq.size() > 0 && rq[0].due <= cycles) begin
        r = rq.pop_front();
        mem_rsp_valid = 1; mem_rsp_src = r.src; mem_rsp_rdata = r.data;
      end
      mem_ready = ($urandom % 4) != 0;
    end
  end

  // ---------------- hart and device helpers ----------------
  task automatic hart_state(int h, priv_e p, logic v);
    hart_priv[h] = p; hart_v[h] = v;
  endtask

  task automatic teecall(int h);
    hart_teecall[h] = 1; @(posedge clk); #1; hart_teecall[h] = 0;
    if (hart_priv[h] == PRIV_M) n_teecall++;
    else begin checks++; if (hart_call_err[h] !== 1'b1) fail("call_err"); n_call_err++; end
  endtask

  task automatic teeret(int h);
    hart_teeret[h] = 1; @(posedge clk); #1; hart_teeret[h] = 0;
    if (hart_priv[h] == PRIV_M) n_teeret++;
    else begin checks++; if (hart_call_err[h] !== 1'b1) fail("call_err"); n_call_err++; end
  endtask

  // One access; returns fault, cause and read data.
  task automatic hacc(int h, logic [PA_WIDTH-1:0] pa, acc_e acc, logic ptw, logic [63:0] wd,
                      output logic flt, output logic [4:0] cause, output logic [63:0] rd);
    hart_req[h] = '{pa: pa, acc: acc, ptw: ptw, wdata: wd};
    hart_req_valid[h] = 1;
    @(negedge clk);
    while (!hart_req_ready[h]) @(negedge clk);
    @(posedge clk); #1;
    hart_req_valid[h] = 0;
    flt = hart_flt_valid[h];
    cause = hart_flt_cause[h];
    rd = '0;
    if (!flt) begin
      @(negedge clk);
      while (!hart_rsp_valid[h]) @(negedge clk);
      rd = rsp_rdata;
      @(posedge clk); #1;
    end
  endtask

  task automatic expect_fault(string what, int h, logic [PA_WIDTH-1:0] pa, acc_e acc, logic ptw,
                              logic [4:0] want_cause);
    logic f; logic [4:0] c; logic [63:0] d;
    hacc(h, pa, acc, ptw, 64'hDEAD, f, c, d);
    checks++;
    if (!f || c !== want_cause) fail($sformatf("%s: fault %0b cause %0d, want cause %0d", what, f, c, want_cause));
  endtask

  task automatic expect_ok_store(string what, int h, logic [PA_WIDTH-1:0] pa, logic [63:0] wd);
    logic f; logic [4:0] c; logic [63:0] d;
    hacc(h, pa, ACC_STORE, 0, wd, f, c, d);
    checks++;
    if (f) fail($sformatf("%s: unexpected fault %0d", what, c));
  endtask

  task automatic expect_ok_load(string what, int h, logic [PA_WIDTH-1:0] pa, acc_e acc, logic ptw,
                                logic [63:0] want);
    logic f; logic [4:0] c; logic [63:0] d;
    hacc(h, pa, acc, ptw, '0, f, c, d);
    checks++;
    if (f) fail($sformatf("%s: unexpected fault %0d", what, c));
    else expect_eq(what, d, want);
  endtask

  task automatic mtt_write(int h, logic [PPN_WIDTH-1:0] ppn, logic c, logic want_ok);
    mtt_wr_valid = 1; mtt_wr_hart = 1'(h); mtt_wr_ppn = ppn; mtt_wr_c = c;
    @(posedge clk); #1; mtt_wr_valid = 0;
    checks++;
    if (mtt_wr_ack !== 1'b1 || mtt_wr_err !== !want_ok) fail($sformatf("mtt write by hart %0d", h));
    if (want_ok) n_mtt_ok++; else n_mtt_refused++;
  endtask

  task automatic dma_access(logic [15:0] rid, logic conf, logic [PA_WIDTH-1:0] addr, logic we,
                            logic [63:0] wd, output logic flt, output logic [63:0] rd);
    dma = '{rid: rid, pasid: 20'h00ABC, addr: addr, conf: conf, we: we, wdata: wd};
    dma_valid = 1;
    @(negedge clk);
    while (!dma_ready) @(negedge clk);
    @(posedge clk); #1;
    dma_valid = 0;
    flt = dma_flt_valid;
    rd = '0;
    if (flt) begin
      checks++;
      if (dma_flt_rid !== rid || dma_flt_pasid !== 20'h00ABC) fail("dma fault record");
    end else begin
      @(negedge clk);
      while (!dma_rsp_valid) @(negedge clk);
      rd = rsp_rdata;
      @(posedge clk); #1;
    end
  endtask

  function automatic logic [PA_WIDTH-1:0] page(int n, int off = 0);
    return {BASE + PPN_WIDTH'(n), 12'(off)};
  endfunction

  // ---------------- scenario ----------------
  initial begin
    logic f; logic [4:0] c; logic [63:0] d;
    for (int h = 0; h < NH; h++) begin
      hart_priv[h] = PRIV_S; hart_v[h] = 0; hart_teecall[h] = 0; hart_teeret[h] = 0;
      hart_req_valid[h] = 0; hart_req[h] = '0;
      if_asg_valid[h] = 0; if_asg_tee[h] = 0; if_asg_file[h] = 0;
      if_acc_valid[h] = 0; if_acc_file[h] = 0;
    end
    mtt_wr_valid = 0; mtt_wr_hart = 0; mtt_wr_ppn = '0; mtt_wr_c = 0;
    mtt_deleg_valid = 0; mtt_deleg_hart = 0; mtt_deleg_val = 0;
    dma_valid = 0; dma = '0;
    tdi_wr_valid = 0; tdi_wr_hart = 0; tdi_wr_idx = 0; tdi_wr_rid = 0; tdi_wr_en = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // Host writes shared data in ordinary memory.
    expect_ok_store("host store NC", 0, page(10, 8), 64'h1111_2222_3333_4444);
    expect_ok_load("host load NC", 0, page(10, 8), ACC_LOAD, 0, 64'h1111_2222_3333_4444);

    // The host cannot convert memory, nor can it enter Confidential-mode.
    mtt_write(0, BASE + 1, 1, 0);
    teecall(0);
    checks++; if (hart_conf[0] !== 1'b0) fail("host entered confidential mode");

    // TEECALL on hart 1 (TSM-driver in M-mode).
    hart_state(1, PRIV_M, 0);
    teecall(1);
    checks++; if (hart_conf[1] !== 1'b1) fail("TEECALL did not set the qualifier");
    // Convert pages 0..3 to confidential.
    for (int i = 0; i < 4; i++) mtt_write(1, BASE + PPN_WIDTH'(i), 1, 1);
    // TSM (HS, qualifier set) cannot write before delegation...
    hart_state(1, PRIV_S, 0);
    #1 checks++; if (hart_mode[1] !== MODE_CHS) fail("TSM mode");
    mtt_write(1, BASE + 4, 1, 0);
    // ...delegation from M-mode, then the TSM converts page 4.
    hart_state(1, PRIV_M, 0);
    mtt_deleg_valid = 1; mtt_deleg_hart = 1; mtt_deleg_val = 1;
    @(posedge clk); #1; mtt_deleg_valid = 0;
    checks++; if (tsm_deleg !== 1'b1) fail("delegation");
    hart_state(1, PRIV_S, 0);
    mtt_write(1, BASE + 4, 1, 1); n_deleg_write++;
    // Outside the tracked window nothing is written.
    mtt_write(1, BASE + 4096, 1, 0);

    // The TVM runs on hart 1 in confidential VS-mode.
    hart_state(1, PRIV_S, 1);
    #1 checks++; if (hart_mode[1] !== MODE_CVS || hart_xlat[1] !== XLAT_TWO) fail("TVM mode");
    expect_ok_store("TVM store C", 1, page(2, 16), 64'hC0FF_EE00_1234_5678);
    expect_ok_load("TVM load C", 1, page(2, 16), ACC_LOAD, 0, 64'hC0FF_EE00_1234_5678);
    expect_ok_load("TVM fetch C", 1, page(2, 16), ACC_FETCH, 0, 64'hC0FF_EE00_1234_5678);
    expect_ok_load("TVM walk C", 1, page(2, 16), ACC_LOAD, 1, 64'hC0FF_EE00_1234_5678);
    expect_ok_load("TVM load shared", 1, page(10, 8), ACC_LOAD, 0, 64'h1111_2222_3333_4444);
    n_shared_ld++;
    expect_fault("TVM fetch NC", 1, page(10, 8), ACC_FETCH, 0, CAUSE_FETCH_ACCESS); n_f_fetch_nc++;
    expect_fault("TVM walk NC (load)", 1, page(11), ACC_LOAD, 1, CAUSE_LOAD_ACCESS); n_f_walk_nc++;
    expect_fault("TVM walk NC (store)", 1, page(11), ACC_STORE, 1, CAUSE_STORE_ACCESS); n_f_walk_nc++;
    // TVM user mode too.
    hart_state(1, PRIV_U, 1);
    #1 checks++; if (hart_mode[1] !== MODE_CVU) fail("TVM user mode");
    expect_ok_load("TVM user load C", 1, page(2, 16), ACC_LOAD, 0, 64'hC0FF_EE00_1234_5678);
    expect_fault("TVM user fetch NC", 1, page(12), ACC_FETCH, 0, CAUSE_FETCH_ACCESS); n_f_fetch_nc++;

    // The host may not touch confidential memory.
    expect_fault("host load C", 0, page(2, 16), ACC_LOAD, 0, CAUSE_LOAD_ACCESS); n_f_nc_to_c++;
    expect_fault("host store C", 0, page(4), ACC_STORE, 0, CAUSE_STORE_ACCESS); n_f_nc_to_c++;
    expect_fault("host fetch C", 0, page(0), ACC_FETCH, 0, CAUSE_FETCH_ACCESS); n_f_nc_to_c++;
    hart_state(0, PRIV_S, 1);
    expect_fault("guest VM load C", 0, page(3), ACC_LOAD, 0, CAUSE_LOAD_ACCESS); n_f_nc_to_c++;
    // M-mode runs bare, outside the MTT check.
    hart_state(0, PRIV_M, 0);
    expect_ok_load("M-mode load C", 0, page(2, 16), ACC_LOAD, 0, 64'hC0FF_EE00_1234_5678);
    n_m_bypass++;
    hart_state(0, PRIV_S, 0);

    // Confidential interrupt files on hart 1.
    hart_state(1, PRIV_S, 0);
    if_asg_valid[1] = 1; if_asg_file[1] = 3; if_asg_tee[1] = 1;
    if_asg_valid[0] = 1; if_asg_file[0] = 3; if_asg_tee[0] = 1;   // host: refused
    @(posedge clk); #1; if_asg_valid[1] = 0; if_asg_valid[0] = 0;
    checks++; if (if_asg_err[1] !== 1'b0 || if_asg_err[0] !== 1'b1) fail("file assignment");
    n_if_refused++;
    checks++; if (if_tee_files[1] !== 8'b0000_1000 || if_tee_files[0] !== 8'b0) fail("tee files");
    // The TVM itself may access its file.
    hart_state(1, PRIV_S, 1);
    if_acc_valid[1] = 1; if_acc_file[1] = 3;
    @(posedge clk); #1; if_acc_valid[1] = 0;
    checks++; if (if_chk_valid[1] !== 1'b1 || if_chk_exc[1] !== 1'b0) fail("TVM file access");
    // TEERET from VS is refused; from M-mode it clears the qualifier.
    teeret(1);
    checks++; if (hart_conf[1] !== 1'b1) fail("TEERET from VS");
    hart_state(1, PRIV_M, 0);
    teeret(1);
    checks++; if (hart_conf[1] !== 1'b0) fail("TEERET");
    // Now hart 1 is a host hart: accesses to file 3 trap.
    hart_state(1, PRIV_S, 0);
    if_acc_valid[1] = 1; if_acc_file[1] = 3;
    @(posedge clk); #1; if_acc_valid[1] = 0;
    checks++; if (!if_chk_exc[1] || if_chk_cause[1] !== CAUSE_ILLEGAL_INSN) fail("illegal insn");
    n_if_ill++;
    hart_state(1, PRIV_S, 1);
    if_acc_valid[1] = 1; if_acc_file[1] = 3;
    @(posedge clk); #1; if_acc_valid[1] = 0;
    checks++; if (!if_chk_exc[1] || if_chk_cause[1] !== CAUSE_VIRTUAL_INSN) fail("virtual insn");
    n_if_virt++;
    if_acc_valid[1] = 1; if_acc_file[1] = 2;
    @(posedge clk); #1; if_acc_valid[1] = 0;
    checks++; if (if_chk_exc[1] !== 1'b0) fail("non-TEE file");
    // And hart 1 now also faults on confidential memory.
    expect_fault("after TEERET load C", 1, page(2, 16), ACC_LOAD, 0, CAUSE_LOAD_ACCESS); n_f_nc_to_c++;

    // Back into the TSM to bind a device for confidential DMA.
    hart_state(1, PRIV_M, 0);
    teecall(1);
    hart_state(1, PRIV_S, 0);
    tdi_wr_valid = 1; tdi_wr_hart = 0; tdi_wr_idx = 0; tdi_wr_rid = 16'h0100; tdi_wr_en = 1;
    @(posedge clk); #1; tdi_wr_valid = 0;
    checks++; if (tdi_err !== 1'b1) fail("host RID binding not refused");
    n_tdi_err++;
    tdi_wr_valid = 1; tdi_wr_hart = 1; tdi_wr_idx = 1; tdi_wr_rid = 16'h0200; tdi_wr_en = 1;
    @(posedge clk); #1; tdi_wr_valid = 0;
    checks++; if (tdi_err !== 1'b0) fail("TSM RID binding refused");

    dma_access(16'h0100, 0, page(2, 16), 0, '0, f, d);
    checks++; if (!f) fail("non-conf DMA to C not blocked"); n_dma_nc_c++;
    dma_access(16'h0100, 1, page(2, 16), 0, '0, f, d);
    checks++; if (!f) fail("conf DMA from unbound RID not blocked"); n_dma_unbound++;
    dma_access(16'h0200, 1, page(2, 16), 0, '0, f, d);
    checks++; if (f) fail("TDI DMA blocked");
    expect_eq("TDI DMA read", d, 64'hC0FF_EE00_1234_5678); n_dma_conf_ok++;
    dma_access(16'h0200, 1, page(3, 0), 1, 64'hFEED_FACE_0000_0001, f, d);
    checks++; if (f) fail("TDI DMA write blocked"); n_dma_conf_ok++;
    dma_access(16'h0100, 0, page(10, 32), 1, 64'h5555_AAAA_5555_AAAA, f, d);
    checks++; if (f) fail("ordinary DMA to NC blocked");

    // Contention: both harts and the device at once.
    hart_state(1, PRIV_S, 1);
    for (int r = 0; r < 40; r++) begin
      fork
        begin
          logic ff; logic [4:0] cc; logic [63:0] dd;
          hacc(0, page(20, 8 * r), ACC_STORE, 0, 64'(r) + 64'h100, ff, cc, dd);
          checks++; if (ff) fail("host store during contention");
        end
        begin
          logic ff; logic [4:0] cc; logic [63:0] dd;
          hacc(1, page(3, 0), ACC_LOAD, 0, '0, ff, cc, dd);
          expect_eq("TVM load DMA data", dd, 64'hFEED_FACE_0000_0001);
        end
        begin
          logic ff; logic [63:0] dd;
          dma_access(16'h0200, 1, page(10, 32), 0, '0, ff, dd);
          expect_eq("DMA read shared", dd, 64'h5555_AAAA_5555_AAAA);
        end
      join
    end
    for (int r = 0; r < 40; r++)
      expect_ok_load("contention data", 0, page(20, 8 * r), ACC_LOAD, 0, 64'(r) + 64'h100);

    // Reclaim page 4: the TSM-driver converts it back; the host can use it.
    hart_state(1, PRIV_M, 0);
    mtt_write(1, BASE + 4, 0, 1);
    expect_ok_store("host store reclaimed", 0, page(4), 64'h0BAD_F00D);
    expect_ok_load("host load reclaimed", 0, page(4), ACC_LOAD, 0, 64'h0BAD_F00D);

    // ---------------- coverage of mechanisms ----------------
    $display("TEECALL %0d TEERET %0d refused-call %0d | MTT writes ok %0d refused %0d delegated %0d",
             n_teecall, n_teeret, n_call_err, n_mtt_ok, n_mtt_refused, n_deleg_write);
    $display("faults: non-conf->C %0d conf fetch->NC %0d conf walk->NC %0d | M bypass %0d shared loads %0d",
             n_f_nc_to_c, n_f_fetch_nc, n_f_walk_nc, n_m_bypass, n_shared_ld);
    $display("intfile: illegal %0d virtual %0d refused-assign %0d | DMA: nc->C %0d unbound %0d conf ok %0d tdi_err %0d",
             n_if_ill, n_if_virt, n_if_refused, n_dma_nc_c, n_dma_unbound, n_dma_conf_ok, n_tdi_err);
    $display("fabric: contention cycles %0d back-pressure cycles %0d key0 %0d key1 %0d | %0d cycles",
             n_contend, n_stall, n_key[0], n_key[1], cycles);
    begin
      int cov [22];
      cov = '{n_teecall, n_teeret, n_call_err, n_mtt_ok, n_mtt_refused, n_deleg_write,
                      n_f_nc_to_c, n_f_fetch_nc, n_f_walk_nc, n_m_bypass, n_shared_ld, n_if_ill,
                      n_if_virt, n_if_refused, n_dma_nc_c, n_dma_unbound, n_dma_conf_ok,
                      n_tdi_err, n_contend, n_stall, n_key[0], n_key[1]};
      foreach (cov[i]) begin
        checks++;
        if (cov[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
