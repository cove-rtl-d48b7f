// cove_pkg: types and constants shared by the CoVE confidential-computing
// hardware blocks.
//
// Privilege encodings follow the RISC-V privileged architecture (U=00, S=01,
// M=11). The operating modes are the rows of the hart-mode table of the CoVE
// architecture: (virtualisation bit V, nominal privilege, Confidential
// qualifier C). The fabric request carries both the requesting agent's
// Confidential qualifier and the domain-assignment attribute (C/NC) of the
// target page, which the memory controller uses to pick a memory key.
// Exception cause numbers are the standard RISC-V ones.
package cove_pkg;

  // Physical address width (RISC-V Sv39/Sv48/Sv57 physical addresses).
  localparam int unsigned PA_WIDTH   = 56;
  // Architectural base page size: 4 KiB.
  localparam int unsigned PAGE_SHIFT = 12;
  localparam int unsigned PPN_WIDTH  = PA_WIDTH - PAGE_SHIFT;
  localparam int unsigned DATA_WIDTH = 64;
  // PCIe requester ID and process address space ID widths.
  localparam int unsigned RID_WIDTH   = 16;
  localparam int unsigned PASID_WIDTH = 20;

  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_R = 2'b10,   // reserved encoding
    PRIV_M = 2'b11
  } priv_e;

  // Operating mode of a hart, including the Confidential qualifier.
  typedef enum logic [3:0] {
    MODE_U   = 4'd0,  // V=0 U C=0
    MODE_HS  = 4'd1,  // V=0 S C=0  (host OS / VMM)
    MODE_M   = 4'd2,  // M-mode     (TSM-driver)
    MODE_VU  = 4'd3,  // V=1 U C=0
    MODE_VS  = 4'd4,  // V=1 S C=0
    MODE_CVU = 4'd5,  // V=1 U C=1  (TVM user)
    MODE_CVS = 4'd6,  // V=1 S C=1  (TVM kernel)
    MODE_CHS = 4'd7,  // V=0 S C=1  (TSM)
    MODE_CU  = 4'd8,  // V=0 U C=1  (no row in the mode table)
    MODE_BAD = 4'd15  // reserved privilege encoding
  } mode_e;

  // Address-translation regime of a mode.
  typedef enum logic [1:0] {
    XLAT_BARE   = 2'd0,  // no paging (M-mode)
    XLAT_SINGLE = 2'd1,  // single stage or bare
    XLAT_TWO    = 2'd2   // first stage + G-stage
  } xlat_e;

  typedef enum logic [1:0] {
    ACC_FETCH = 2'd0,
    ACC_LOAD  = 2'd1,
    ACC_STORE = 2'd2
  } acc_e;

  // RISC-V exception causes used here.
  localparam logic [4:0] CAUSE_FETCH_ACCESS = 5'd1;
  localparam logic [4:0] CAUSE_ILLEGAL_INSN = 5'd2;
  localparam logic [4:0] CAUSE_LOAD_ACCESS  = 5'd5;
  localparam logic [4:0] CAUSE_STORE_ACCESS = 5'd7;
  localparam logic [4:0] CAUSE_VIRTUAL_INSN = 5'd22;

  // A hart's physical access after (optional) address translation.
  typedef struct packed {
    logic [PA_WIDTH-1:0]   pa;
    acc_e                  acc;
    logic                  ptw;    // implicit page-table-walk access
    logic [DATA_WIDTH-1:0] wdata;
  } hart_req_t;

  // A device DMA access arriving from the IO bridge.
  typedef struct packed {
    logic [RID_WIDTH-1:0]   rid;
    logic [PASID_WIDTH-1:0] pasid;
    logic [PA_WIDTH-1:0]    addr;
    logic                   conf;  // DMA from a TEE-bound device interface
    logic                   we;
    logic [DATA_WIDTH-1:0]  wdata;
  } dma_req_t;

  // A request on the SoC fabric towards the memory controller.
  typedef struct packed {
    logic [PA_WIDTH-1:0]   pa;
    logic                  we;
    logic [DATA_WIDTH-1:0] wdata;
    logic                  qual;   // Confidential qualifier of the requester
    logic                  dom_c;  // domain-assignment PMA of the page: 1 = C
  } fab_req_t;

  function automatic logic [4:0] access_fault_cause(acc_e acc);
    case (acc)
      ACC_FETCH: return CAUSE_FETCH_ACCESS;
      ACC_STORE: return CAUSE_STORE_ACCESS;
      default:   return CAUSE_LOAD_ACCESS;
    endcase
  endfunction

endpackage
