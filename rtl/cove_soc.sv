// cove_soc: the CoVE confidential-computing hardware of an SoC.
//
// This top level wires the hardware side of the CoVE architecture: for each
// hart a Confidential-mode qualifier, an MTT check in the hart's MMU and a
// guard on its guest interrupt files; one Memory Tracking Table shared by all
// harts and the IOMMU; an IOMMU MTT check for device DMA; and the front end of
// the memory controller, which merges the domain-tagged traffic of the harts
// and the IOMMU and selects the memory key from the domain.
//
//   hart i --> hart_conf_qualifier --(conf, mtt_en)--> hart_mtt_check --+
//                                                        |   (MTT port i) |
//   IO bridge DMA -----------------> iommu_mtt_check ----+   (MTT port N) +--> mem_ctrl --> memory channel
//                                                        |                     (key id = C bit)
//                                                   mtt_table
//
// Harts, caches, page-table walkers, the encryption engine, the memory and the
// IO bridge are outside this block; their signals are the ports. Hart
// requests are physical accesses after translation. Trusted configuration
// (MTT writes, TSM delegation, interrupt-file assignment, IOMMU RID binding)
// enters through ports that name the issuing hart; each is checked against
// that hart's current qualifier and privilege.
//
// Timing: accepted accesses reach the memory channel in the cycle they are
// offered (subject to arbitration); faults and configuration errors are
// reported one cycle after the request. Memory completions return on
// hart_rsp_valid/dma_rsp_valid with the shared rsp_rdata.
module cove_soc
  import cove_pkg::*;
#(
  parameter int unsigned          NUM_HARTS    = 2,
  parameter int unsigned          MTT_PAGES    = 4096,
  parameter logic [PPN_WIDTH-1:0] MTT_BASE_PPN = PPN_WIDTH'('h80000),
  parameter int unsigned          NUM_FILES    = 8,
  parameter int unsigned          NUM_TDI      = 4,
  localparam int unsigned HART_W = (NUM_HARTS > 1) ? $clog2(NUM_HARTS) : 1,
  localparam int unsigned NPORT  = NUM_HARTS + 1,
  localparam int unsigned SRC_W  = $clog2(NPORT),
  localparam int unsigned FILE_W = $clog2(NUM_FILES),
  localparam int unsigned TDI_W  = $clog2(NUM_TDI)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // hart state and context switches
  input  priv_e                  hart_priv     [NUM_HARTS],
  input  logic                   hart_v        [NUM_HARTS],
  input  logic                   hart_teecall  [NUM_HARTS],
  input  logic                   hart_teeret   [NUM_HARTS],
  output logic                   hart_conf     [NUM_HARTS],
  output mode_e                  hart_mode     [NUM_HARTS],
  output xlat_e                  hart_xlat     [NUM_HARTS],
  output logic                   hart_call_err [NUM_HARTS],
  // hart physical accesses
  input  logic                   hart_req_valid[NUM_HARTS],
  output logic                   hart_req_ready[NUM_HARTS],
  input  hart_req_t              hart_req      [NUM_HARTS],
  output logic                   hart_flt_valid[NUM_HARTS],
  output logic [4:0]             hart_flt_cause[NUM_HARTS],
  output logic                   hart_rsp_valid[NUM_HARTS],
  output logic [DATA_WIDTH-1:0]  rsp_rdata,
  // MTT programming interface
  input  logic                   mtt_wr_valid,
  input  logic [HART_W-1:0]      mtt_wr_hart,
  input  logic [PPN_WIDTH-1:0]   mtt_wr_ppn,
  input  logic                   mtt_wr_c,
  output logic                   mtt_wr_ack,
  output logic                   mtt_wr_err,
  input  logic                   mtt_deleg_valid,
  input  logic [HART_W-1:0]      mtt_deleg_hart,
  input  logic                   mtt_deleg_val,
  output logic                   tsm_deleg,
  // guest interrupt files
  input  logic                   if_asg_valid  [NUM_HARTS],
  input  logic [FILE_W-1:0]      if_asg_file   [NUM_HARTS],
  input  logic                   if_asg_tee    [NUM_HARTS],
  output logic                   if_asg_err    [NUM_HARTS],
  input  logic                   if_acc_valid  [NUM_HARTS],
  input  logic [FILE_W-1:0]      if_acc_file   [NUM_HARTS],
  output logic                   if_chk_valid  [NUM_HARTS],
  output logic                   if_chk_exc    [NUM_HARTS],
  output logic [4:0]             if_chk_cause  [NUM_HARTS],
  output logic [NUM_FILES-1:0]   if_tee_files  [NUM_HARTS],
  // device DMA from the IO bridge
  input  logic                   dma_valid,
  output logic                   dma_ready,
  input  dma_req_t               dma,
  output logic                   dma_flt_valid,
  output logic [RID_WIDTH-1:0]   dma_flt_rid,
  output logic [PASID_WIDTH-1:0] dma_flt_pasid,
  output logic                   dma_rsp_valid,
  input  logic                   tdi_wr_valid,
  input  logic [HART_W-1:0]      tdi_wr_hart,
  input  logic [TDI_W-1:0]       tdi_wr_idx,
  input  logic [RID_WIDTH-1:0]   tdi_wr_rid,
  input  logic                   tdi_wr_en,
  output logic                   tdi_err,
  // memory channel (to the memory encryption engine and DRAM)
  output logic                   mem_valid,
  input  logic                   mem_ready,
  output logic [PA_WIDTH-1:0]    mem_pa,
  output logic                   mem_we,
  output logic [DATA_WIDTH-1:0]  mem_wdata,
  output logic                   mem_key_id,
  output logic [SRC_W-1:0]       mem_src,
  input  logic                   mem_rsp_valid,
  input  logic [SRC_W-1:0]       mem_rsp_src,
  input  logic [DATA_WIDTH-1:0]  mem_rsp_rdata
);

  logic                 mtt_en   [NUM_HARTS];
  logic [PPN_WIDTH-1:0] mtt_ppn  [NPORT];
  logic                 mtt_c    [NPORT];
  logic                 p_valid  [NPORT];
  logic                 p_ready  [NPORT];
  fab_req_t             p_req    [NPORT];
  logic                 p_rsp    [NPORT];

  for (genvar h = 0; h < NUM_HARTS; h++) begin : g_hart
    hart_conf_qualifier u_qual (
      .clk      (clk),
      .rst_n    (rst_n),
      .priv     (hart_priv[h]),
      .v        (hart_v[h]),
      .teecall  (hart_teecall[h]),
      .teeret   (hart_teeret[h]),
      .conf     (hart_conf[h]),
      .mode     (hart_mode[h]),
      .xlat     (hart_xlat[h]),
      .mtt_en   (mtt_en[h]),
      .call_err (hart_call_err[h])
    );

    hart_mtt_check u_mtt_chk (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (hart_req_valid[h]),
      .req_ready (hart_req_ready[h]),
      .req       (hart_req[h]),
      .conf      (hart_conf[h]),
      .mtt_en    (mtt_en[h]),
      .flt_valid (hart_flt_valid[h]),
      .flt_cause (hart_flt_cause[h]),
      .mtt_ppn   (mtt_ppn[h]),
      .mtt_c     (mtt_c[h]),
      .fab_valid (p_valid[h]),
      .fab_ready (p_ready[h]),
      .fab_req   (p_req[h])
    );

    intfile_guard #(.NUM_FILES(NUM_FILES)) u_if_guard (
      .clk       (clk),
      .rst_n     (rst_n),
      .asg_valid (if_asg_valid[h]),
      .asg_file  (if_asg_file[h]),
      .asg_tee   (if_asg_tee[h]),
      .asg_qual  (hart_conf[h]),
      .asg_err   (if_asg_err[h]),
      .acc_valid (if_acc_valid[h]),
      .acc_file  (if_acc_file[h]),
      .acc_qual  (hart_conf[h]),
      .acc_v     (hart_v[h]),
      .chk_valid (if_chk_valid[h]),
      .chk_exc   (if_chk_exc[h]),
      .chk_cause (if_chk_cause[h]),
      .tee_files (if_tee_files[h])
    );

    assign hart_rsp_valid[h] = p_rsp[h];
  end

  mtt_table #(
    .NUM_RD       (NPORT),
    .MTT_PAGES    (MTT_PAGES),
    .MTT_BASE_PPN (MTT_BASE_PPN)
  ) u_mtt (
    .clk         (clk),
    .rst_n       (rst_n),
    .rd_ppn      (mtt_ppn),
    .rd_c        (mtt_c),
    .wr_valid    (mtt_wr_valid),
    .wr_ppn      (mtt_wr_ppn),
    .wr_c        (mtt_wr_c),
    .wr_qual     (hart_conf[mtt_wr_hart]),
    .wr_priv     (hart_priv[mtt_wr_hart]),
    .wr_v        (hart_v[mtt_wr_hart]),
    .wr_ack      (mtt_wr_ack),
    .wr_err      (mtt_wr_err),
    .deleg_valid (mtt_deleg_valid),
    .deleg_val   (mtt_deleg_val),
    .deleg_qual  (hart_conf[mtt_deleg_hart]),
    .deleg_priv  (hart_priv[mtt_deleg_hart]),
    .tsm_deleg   (tsm_deleg)
  );

  iommu_mtt_check #(.NUM_TDI(NUM_TDI)) u_iommu (
    .clk          (clk),
    .rst_n        (rst_n),
    .dma_valid    (dma_valid),
    .dma_ready    (dma_ready),
    .dma          (dma),
    .flt_valid    (dma_flt_valid),
    .flt_rid      (dma_flt_rid),
    .flt_pasid    (dma_flt_pasid),
    .mtt_ppn      (mtt_ppn[NUM_HARTS]),
    .mtt_c        (mtt_c[NUM_HARTS]),
    .tdi_wr_valid (tdi_wr_valid),
    .tdi_wr_idx   (tdi_wr_idx),
    .tdi_wr_rid   (tdi_wr_rid),
    .tdi_wr_en    (tdi_wr_en),
    .tdi_wr_qual  (hart_conf[tdi_wr_hart]),
    .tdi_err      (tdi_err),
    .fab_valid    (p_valid[NUM_HARTS]),
    .fab_ready    (p_ready[NUM_HARTS]),
    .fab_req      (p_req[NUM_HARTS])
  );
  assign dma_rsp_valid = p_rsp[NUM_HARTS];

  mem_ctrl #(.NUM_PORTS(NPORT)) u_mc (
    .clk           (clk),
    .rst_n         (rst_n),
    .in_valid      (p_valid),
    .in_ready      (p_ready),
    .in_req        (p_req),
    .rsp_valid     (p_rsp),
    .rsp_rdata     (rsp_rdata),
    .mem_valid     (mem_valid),
    .mem_ready     (mem_ready),
    .mem_pa        (mem_pa),
    .mem_we        (mem_we),
    .mem_wdata     (mem_wdata),
    .mem_key_id    (mem_key_id),
    .mem_src       (mem_src),
    .mem_rsp_valid (mem_rsp_valid),
    .mem_rsp_src   (mem_rsp_src),
    .mem_rsp_rdata (mem_rsp_rdata)
  );

endmodule
