// hart_mtt_check: the MTT extension of a hart's MMU.
//
// Every physical access of a hart (after first-stage and G-stage translation,
// or untranslated when paging is off, including the implicit accesses of a
// page-table walk) is looked up in the Memory Tracking Table and checked
// against the hart's Confidential qualifier. The access faults when
//
//   (~Confidential-mode & C) | (Confidential-mode & (code-fetch | page-walk) & NC)
//
// so a non-confidential hart never touches confidential memory, and a
// confidential hart fetches code and page tables only from confidential
// memory, while its loads and stores may also reach shared non-confidential
// memory. M-mode accesses are not subject to the MTT (mtt_en = 0).
//
// Interface: the request side is valid/ready. An access that passes is
// forwarded in the same cycle on the fabric port (valid/ready passed
// through), tagged with the requester's qualifier and the page's domain
// attribute. An access that faults is consumed at once and answered one cycle
// later on flt_valid with the RISC-V access-fault cause of the access type
// (a page-walk fault reports the cause of the access that caused the walk).
// The MTT lookup is combinational through mtt_ppn/mtt_c.
module hart_mtt_check
  import cove_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // hart side
  input  logic                 req_valid,
  output logic                 req_ready,
  input  hart_req_t            req,
  input  logic                 conf,      // hart's Confidential qualifier
  input  logic                 mtt_en,    // 0 in M-mode
  output logic                 flt_valid,
  output logic [4:0]           flt_cause,
  // MTT lookup
  output logic [PPN_WIDTH-1:0] mtt_ppn,
  input  logic                 mtt_c,
  // fabric side
  output logic                 fab_valid,
  input  logic                 fab_ready,
  output fab_req_t             fab_req
);

  logic fault;

  assign mtt_ppn = req.pa[PA_WIDTH-1:PAGE_SHIFT];

  assign fault = mtt_en &&
                 ((!conf && mtt_c) ||
                  (conf && (req.acc == ACC_FETCH || req.ptw) && !mtt_c));

  assign fab_valid     = req_valid && !fault;
  assign req_ready     = fault ? 1'b1 : fab_ready;
  assign fab_req.pa    = req.pa;
  assign fab_req.we    = (req.acc == ACC_STORE) && !req.ptw;
  assign fab_req.wdata = req.wdata;
  assign fab_req.qual  = conf;
  assign fab_req.dom_c = mtt_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flt_valid <= 1'b0;
      flt_cause <= '0;
    end else begin
      flt_valid <= req_valid && fault;
      if (req_valid && fault) flt_cause <= access_fault_cause(req.acc);
    end
  end

  // A non-confidential hart never reaches confidential memory.
  a_no_leak: assert property (@(posedge clk) disable iff (!rst_n)
    fab_valid && mtt_en |-> !(fab_req.dom_c && !fab_req.qual));

endmodule
