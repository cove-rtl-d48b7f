// mem_ctrl: front end of the memory controller.
//
// The memory controller receives domain-tagged traffic from the hart MMUs and
// from the IOMMU and places it on one memory channel. Each request carries the
// domain-assignment attribute of its page (C or NC); the controller turns it
// into the key identifier that selects the memory-protection key, so that
// confidential and non-confidential data are protected under different keys.
// In this design the key identifier is the C bit itself (key 1 for
// confidential memory, key 0 for the rest). The cipher and the memory itself
// sit behind the memory channel and are not part of this block.
//
// Arbitration is round robin among NUM_PORTS valid/ready input ports. The
// winner is presented on the memory channel combinationally; the grant
// pointer moves past the winner when the channel accepts it. Each accepted
// request carries its port number (mem_src) to the memory, and the memory
// returns every read and write completion with that number; the completion is
// steered back to the port it came from (rsp_valid one-hot).
module mem_ctrl
  import cove_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 3,
  localparam int unsigned SRC_W = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input ports
  input  logic                  in_valid [NUM_PORTS],
  output logic                  in_ready [NUM_PORTS],
  input  fab_req_t              in_req   [NUM_PORTS],
  output logic                  rsp_valid[NUM_PORTS],
  output logic [DATA_WIDTH-1:0] rsp_rdata,
  // memory channel
  output logic                  mem_valid,
  input  logic                  mem_ready,
  output logic [PA_WIDTH-1:0]   mem_pa,
  output logic                  mem_we,
  output logic [DATA_WIDTH-1:0] mem_wdata,
  output logic                  mem_key_id,
  output logic [SRC_W-1:0]      mem_src,
  input  logic                  mem_rsp_valid,
  input  logic [SRC_W-1:0]      mem_rsp_src,
  input  logic [DATA_WIDTH-1:0] mem_rsp_rdata
);

  logic [SRC_W-1:0] ptr;     // highest-priority port this cycle
  logic [SRC_W-1:0] grant;
  logic             any;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = 0; k < NUM_PORTS; k++) begin
      logic [SRC_W-1:0] p;
      p = SRC_W'((int'(ptr) + k) % NUM_PORTS);
      if (!any && in_valid[p]) begin
        any   = 1'b1;
        grant = p;
      end
    end
  end

  assign mem_valid  = any;
  assign mem_pa     = in_req[grant].pa;
  assign mem_we     = in_req[grant].we;
  assign mem_wdata  = in_req[grant].wdata;
  assign mem_key_id = in_req[grant].dom_c;
  assign mem_src    = grant;

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_ready[p]  = any && (grant == SRC_W'(p)) && mem_ready;
      rsp_valid[p] = mem_rsp_valid && (mem_rsp_src == SRC_W'(p));
    end
  end
  assign rsp_rdata = mem_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (any && mem_ready) begin
      ptr <= (int'(grant) == NUM_PORTS - 1) ? '0 : grant + 1'b1;
    end
  end

  // A request, once offered, stays until the memory channel takes it.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_valid && !mem_ready |=> mem_valid);

endmodule
