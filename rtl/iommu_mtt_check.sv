// iommu_mtt_check: the MTT check in the IOMMU for device DMA.
//
// Device DMA arrives from the IO bridge (PCIe root port) with its requester
// ID (RID), PASID, address and a flag saying whether it is confidential DMA
// from a TEE device interface (TDISP) or ordinary non-confidential DMA. The
// IOMMU looks the target page up in the Memory Tracking Table:
//   * non-confidential DMA to a confidential (C) page faults;
//   * confidential DMA is accepted only from a requester ID that the TSM has
//     bound to a TVM; confidential DMA from any other RID faults;
//   * confidential DMA may reach both C pages and shared NC pages.
// Accepted DMA is forwarded to the memory controller tagged with its
// qualifier (the confidential flag) and the page's domain attribute.
//
// The RID binding table (NUM_TDI entries) is the IOMMU's secure programming
// interface: it may be written only by a requester holding the Confidential
// qualifier, i.e. the TSM; other writes are refused and flagged on tdi_err
// one cycle later. Address translation by the IOMMU is not modelled here: the
// DMA address is taken to be a physical address.
//
// Interface: valid/ready on both sides; accepted requests pass through in
// the same cycle, faulting ones are consumed and reported one cycle later on
// flt_valid with the faulting RID and PASID for the IOMMU fault record.
module iommu_mtt_check
  import cove_pkg::*;
#(
  parameter int unsigned NUM_TDI = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // DMA from the IO bridge
  input  logic                         dma_valid,
  output logic                         dma_ready,
  input  dma_req_t                     dma,
  output logic                         flt_valid,
  output logic [RID_WIDTH-1:0]         flt_rid,
  output logic [PASID_WIDTH-1:0]       flt_pasid,
  // MTT lookup
  output logic [PPN_WIDTH-1:0]         mtt_ppn,
  input  logic                         mtt_c,
  // secure programming interface: bind RIDs for confidential DMA
  input  logic                         tdi_wr_valid,
  input  logic [$clog2(NUM_TDI)-1:0]   tdi_wr_idx,
  input  logic [RID_WIDTH-1:0]         tdi_wr_rid,
  input  logic                         tdi_wr_en,
  input  logic                         tdi_wr_qual,
  output logic                         tdi_err,
  // fabric side
  output logic                         fab_valid,
  input  logic                         fab_ready,
  output fab_req_t                     fab_req
);

  logic [RID_WIDTH-1:0] tdi_rid [NUM_TDI];
  logic [NUM_TDI-1:0]   tdi_en;
  logic                 rid_bound;
  logic                 fault;

  always_comb begin
    rid_bound = 1'b0;
    for (int i = 0; i < NUM_TDI; i++) begin
      if (tdi_en[i] && tdi_rid[i] == dma.rid) rid_bound = 1'b1;
    end
  end

  assign mtt_ppn = dma.addr[PA_WIDTH-1:PAGE_SHIFT];
  assign fault   = dma.conf ? !rid_bound : mtt_c;

  assign fab_valid     = dma_valid && !fault;
  assign dma_ready     = fault ? 1'b1 : fab_ready;
  assign fab_req.pa    = dma.addr;
  assign fab_req.we    = dma.we;
  assign fab_req.wdata = dma.wdata;
  assign fab_req.qual  = dma.conf;
  assign fab_req.dom_c = mtt_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tdi_en    <= '0;
      tdi_err   <= 1'b0;
      flt_valid <= 1'b0;
      flt_rid   <= '0;
      flt_pasid <= '0;
      for (int i = 0; i < NUM_TDI; i++) tdi_rid[i] <= '0;
    end else begin
      tdi_err <= tdi_wr_valid && !tdi_wr_qual;
      if (tdi_wr_valid && tdi_wr_qual) begin
        tdi_rid[tdi_wr_idx] <= tdi_wr_rid;
        tdi_en[tdi_wr_idx]  <= tdi_wr_en;
      end
      flt_valid <= dma_valid && fault;
      if (dma_valid && fault) begin
        flt_rid   <= dma.rid;
        flt_pasid <= dma.pasid;
      end
    end
  end

  a_no_nc_dma_to_c: assert property (@(posedge clk) disable iff (!rst_n)
    fab_valid |-> !(fab_req.dom_c && !fab_req.qual));

endmodule
