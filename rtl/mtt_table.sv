// mtt_table: the Memory Tracking Table (MTT) of CoVE.
//
// The MTT holds the domain-assignment physical memory attribute of every
// tracked 4 KiB page: one bit per page, 1 = confidential (C), 0 =
// non-confidential (NC). Pages outside the tracked window [MTT_BASE_PPN,
// MTT_BASE_PPN + MTT_PAGES) read as NC. All memory starts non-confidential
// after reset and is converted page by page.
//
// Lookups: NUM_RD independent read ports (one per hart MMU and one for the
// IOMMU), combinational from rd_ppn to rd_c.
//
// Programming: the table may be written only by trusted software, which is
// identified by the writer's Confidential qualifier. A write is accepted when
// the writer has the qualifier set and either runs in M-mode (the TSM-driver)
// or runs in HS-mode (V=0, S) while the TSM-driver has delegated MTT
// management to the TSM through the delegation bit. The delegation bit itself
// is written only from M-mode with the qualifier set. Each write request is
// answered one cycle later on wr_ack with wr_err set if it was refused or its
// page is outside the tracked window; refused writes leave the table as it
// was.
//
// The architecture keeps the MTT in memory and looks it up from there; this
// design keeps it on chip as a flat bit vector, which gives the same lookup
// result without a table walker or MTT cache.
module mtt_table
  import cove_pkg::*;
#(
  parameter int unsigned         NUM_RD       = 3,
  parameter int unsigned         MTT_PAGES    = 4096,
  parameter logic [PPN_WIDTH-1:0] MTT_BASE_PPN = PPN_WIDTH'('h80000)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup ports
  input  logic [PPN_WIDTH-1:0] rd_ppn [NUM_RD],
  output logic                 rd_c   [NUM_RD],
  // programming port
  input  logic                 wr_valid,
  input  logic [PPN_WIDTH-1:0] wr_ppn,
  input  logic                 wr_c,
  input  logic                 wr_qual,   // writer's Confidential qualifier
  input  priv_e                wr_priv,
  input  logic                 wr_v,
  output logic                 wr_ack,
  output logic                 wr_err,
  // delegation of MTT management to the TSM
  input  logic                 deleg_valid,
  input  logic                 deleg_val,
  input  logic                 deleg_qual,
  input  priv_e                deleg_priv,
  output logic                 tsm_deleg
);

  localparam int unsigned IDX_W = (MTT_PAGES > 1) ? $clog2(MTT_PAGES) : 1;

  logic [MTT_PAGES-1:0] cbits;

  function automatic logic in_window(logic [PPN_WIDTH-1:0] ppn);
    return (ppn >= MTT_BASE_PPN) &&
           ((ppn - MTT_BASE_PPN) < PPN_WIDTH'(MTT_PAGES));
  endfunction

  function automatic logic [IDX_W-1:0] to_idx(logic [PPN_WIDTH-1:0] ppn);
    return IDX_W'(ppn - MTT_BASE_PPN);
  endfunction

  always_comb begin
    for (int i = 0; i < NUM_RD; i++) begin
      rd_c[i] = in_window(rd_ppn[i]) ? cbits[to_idx(rd_ppn[i])] : 1'b0;
    end
  end

  logic wr_allowed;
  assign wr_allowed = wr_qual &&
                      ((wr_priv == PRIV_M) ||
                       (wr_priv == PRIV_S && !wr_v && tsm_deleg)) &&
                      in_window(wr_ppn);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cbits     <= '0;
      tsm_deleg <= 1'b0;
      wr_ack    <= 1'b0;
      wr_err    <= 1'b0;
    end else begin
      wr_ack <= wr_valid;
      wr_err <= wr_valid && !wr_allowed;
      if (wr_valid && wr_allowed) cbits[to_idx(wr_ppn)] <= wr_c;
      if (deleg_valid && deleg_qual && deleg_priv == PRIV_M) tsm_deleg <= deleg_val;
    end
  end

endmodule
