// tb_mem_ctrl: self-checking test of the memory-controller front end.
//
// Three ports offer random domain-tagged requests and hold each one until it
// is accepted. The testbench checks the round-robin order independently (the
// next grant is the first valid port after the previous winner), that the
// memory channel carries the winner's fields with key id = C bit, that no
// request is lost or duplicated, and that completions returned with a port
// number reach only that port.
module tb_mem_ctrl;
  import cove_pkg::*;

  localparam int unsigned NP = 3;
  localparam int unsigned SW = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid [NP], in_ready [NP], rsp_valid [NP];
  fab_req_t in_req [NP];
  logic [DATA_WIDTH-1:0] rsp_rdata, mem_wdata, mem_rsp_rdata;
  logic mem_valid, mem_ready, mem_we, mem_key_id, mem_rsp_valid;
  logic [PA_WIDTH-1:0] mem_pa;
  logic [SW-1:0] mem_src, mem_rsp_src;
  int checks = 0, failures = 0;
  int sent [NP], recv [NP];
  int last;
  int n_key [2];

  mem_ctrl #(.NUM_PORTS(NP)) dut (.*);

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

  function automatic fab_req_t new_req(int p);
    fab_req_t r;
    r.pa    = {$urandom, $urandom};
    r.pa[PA_WIDTH-1 -: 2] = 2'(p);
    r.we    = 1'($urandom);
    r.wdata = {$urandom, $urandom};
    r.qual  = 1'($urandom);
    r.dom_c = 1'($urandom);
    return r;
  endfunction

  initial begin
    int exp, q;
    for (int p = 0; p < NP; p++) begin
      in_valid[p] = 0; in_req[p] = new_req(p); sent[p] = 0; recv[p] = 0;
    end
    n_key[0] = 0; n_key[1] = 0;
    mem_ready = 0; mem_rsp_valid = 0; mem_rsp_src = 0; mem_rsp_rdata = 0;
    last = NP - 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int i = 0; i < 20000; i++) begin
      for (int p = 0; p < NP; p++) if (!in_valid[p] && ($urandom % 3) == 0) begin
        in_valid[p] = 1; in_req[p] = new_req(p);
      end
      mem_ready     = ($urandom % 4) != 0;
      mem_rsp_valid = 1'($urandom);
      mem_rsp_src   = SW'($urandom_range(0, NP - 1));
      mem_rsp_rdata = {$urandom, $urandom};
      #1;
      exp = -1;
      for (int k = 1; k <= NP; k++) begin
        q = (last + k) % NP;
        if (exp < 0 && in_valid[q]) exp = q;
      end
      checks++;
      if (mem_valid !== (exp >= 0)) fail("mem_valid");
      if (exp >= 0) begin
        checks++;
        if (int'(mem_src) != exp || mem_pa !== in_req[exp].pa || mem_we !== in_req[exp].we ||
            mem_wdata !== in_req[exp].wdata || mem_key_id !== in_req[exp].dom_c)
          fail($sformatf("grant %0d expected %0d", mem_src, exp));
      end
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (in_ready[p] !== (exp == p && mem_ready)) fail("in_ready");
        checks++;
        if (rsp_valid[p] !== (mem_rsp_valid && int'(mem_rsp_src) == p)) fail("rsp routing");
        if (rsp_valid[p]) recv[p]++;
      end
      checks++;
      if (rsp_rdata !== mem_rsp_rdata) fail("rsp data");
      @(posedge clk);
      #1;
      if (exp >= 0 && mem_ready) begin
        in_valid[exp] = 0;
        sent[exp]++;
        n_key[in_req[exp].dom_c]++;
        last = exp;
      end
    end
    $display("accepted per port: %0d %0d %0d; key0 %0d key1 %0d", sent[0], sent[1], sent[2],
             n_key[0], n_key[1]);
    checks++;
    if (sent[0] == 0 || sent[1] == 0 || sent[2] == 0 || n_key[0] == 0 || n_key[1] == 0)
      fail("coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
