// tb_nma: end-to-end test of one NMA (4 engines) against a memory model
// with random gaps; same host sequence and checks as tb_iks_top.
//
// Plays the host: writes the offload context and query vectors of every
// NMA into its context buffers, rings all doorbells, waits for each NMA to
// write its doorbell back, reads every output scratchpad and compares the
// partial top-K lists (scores and embedding-vector addresses) with a
// reference computed on reals from the same DRAM contents. Two offloads:
//   1. VD = 32 < 68 (score read-out longer than a block: stalls), N not a
//      multiple of 68 (partly filled last block), different batch sizes.
//   2. VD = 80, checks the cycle count of an NMA against
//      ceil(N/68)*VD + 68 read-out cycles (memory without gaps on NMA 0).
// Mechanisms counted and required at least once: stall, ignored score at
// a full top-K list, partly filled block, multi-engine batch, memory gap.
module tb_nma;
  import iks_pkg::*;
  import iks_tb_pkg::*;

  localparam int NNMA = 1;
  localparam int NPE  = 4;
  localparam int NL   = 68;
  localparam int KK   = 32;
  localparam int LAT  = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_req_t                 host_req;
  host_rsp_t                 host_rsp;
  logic [NNMA-1:0]           doorbell;
  logic [NNMA-1:0]           mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  addr_t [NNMA-1:0]          mem_req_addr;
  fp16_t [NNMA-1:0][NL-1:0]  mem_rsp_data;

  nma #(.NPE(NPE)) dut (
    .clk(clk), .rst_n(rst_n), .host_req(host_req), .host_rsp(host_rsp), .doorbell(doorbell[0]),
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]), .mem_req_addr(mem_req_addr[0]),
    .mem_rsp_valid(mem_rsp_valid[0]), .mem_rsp_ready(mem_rsp_ready[0]), .mem_rsp_data(mem_rsp_data[0]));

  for (genvar n = 0; n < NNMA; n++) begin : g_mem
    lpddr_model #(.NLANES(NL), .LAT(LAT), .GAP_PCT(20)) u_mem (
      .clk(clk), .rst_n(rst_n),
      .req_valid(mem_req_valid[n]), .req_ready(mem_req_ready[n]), .req_addr(mem_req_addr[n]),
      .rsp_valid(mem_rsp_valid[n]), .rsp_ready(mem_rsp_ready[n]), .rsp_data(mem_rsp_data[n]));
  end

  int checks = 0, failures = 0;
  int n_stall = 0, n_ignored = 0, n_partial = 0, n_batch = 0, n_gap = 0;

  // mechanism counters, sampled from inside the design
  always @(posedge clk) begin
    if (dut.noc_stall) n_stall++;
    if (dut.sc_ignored[0]) n_ignored++;
    if (mem_req_valid[0] && !mem_req_ready[0]) n_gap++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [HOST_ADDR_W-1:0] haddr(int n, int pe, int off);
    return HOST_ADDR_W'((n << 18) | (pe << 12) | off);
  endfunction

  task automatic hwrite(logic [HOST_ADDR_W-1:0] a, logic [63:0] d);
    @(posedge clk);
    host_req <= '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(posedge clk);
    host_req <= '0;
  endtask

  task automatic hread(logic [HOST_ADDR_W-1:0] a, output logic [63:0] d);
    @(posedge clk);
    host_req <= '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(posedge clk);
    host_req <= '0;
    while (!host_rsp.valid) @(posedge clk);
    d = host_rsp.rdata;
  endtask

  logic [15:0] qv [NNMA][NPE][];
  longint      t_start, t_done [NNMA];

  logic [NNMA-1:0] db_q;
  always @(posedge clk) begin
    for (int n = 0; n < NNMA; n++)
      if (db_q[n] && !doorbell[n]) t_done[n] = $time / 10;
    db_q <= doorbell;
  end

  task automatic offload(int vd, int nvec[NNMA], int nq[NNMA], bit check_time);
    addr_t base [NNMA];
    logic [63:0] d;
    for (int n = 0; n < NNMA; n++) begin
      base[n] = addr_t'(36'h1_0000 * (n + 1) + 136 * 5);
      hwrite(haddr(n, 0, 'hC00), 64'(base[n]));
      hwrite(haddr(n, 0, 'hC08), 64'(vd));
      hwrite(haddr(n, 0, 'hC10), 64'(nvec[n]));
      hwrite(haddr(n, 0, 'hC18), 64'(nq[n]));
      for (int p = 0; p < nq[n]; p++) begin
        qv[n][p] = new[vd];
        for (int j = 0; j < vd; j++) begin
          qv[n][p][j] = rand_fp16($urandom);
          hwrite(haddr(n, p, 2 * j), 64'(qv[n][p][j]));
        end
      end
      if (nvec[n] % 68 != 0) n_partial++;
      if (nq[n] > 1) n_batch++;
    end
    // read back one query element through the host port
    hread(haddr(0, 0, 2 * (vd - 1)), d);
    checks++;
    if (d[15:0] !== qv[0][0][vd-1]) begin
      failures++;
      $display("FAIL query scratchpad read-back %h vs %h", d[15:0], qv[0][0][vd-1]);
    end
    t_start = $time / 10;
    for (int n = 0; n < NNMA; n++) hwrite(haddr(n, 0, 'hC20), 64'd1);
    // host blocks until every doorbell has been written back (umwait)
    for (int n = 0; n < NNMA; n++) begin
      do hread(haddr(n, 0, 'hC20), d); while (d != 0);
    end
    checks++;
    if (doorbell != '0) begin
      failures++;
      $display("FAIL doorbell output still set");
    end
    for (int n = 0; n < NNMA; n++) begin
      int nblk = (nvec[n] + 67) / 68;
      for (int p = 0; p < nq[n]; p++) begin
        logic [15:0] sc [];
        int          ord [$];
        sc = new[nvec[n]];
        for (int i = 0; i < nvec[n]; i++) begin
          logic [15:0] ev [];
          ev = new[vd];
          for (int j = 0; j < vd; j++)
            ev[j] = ev_elem(base[n] + addr_t'(136 * ((i / 68) * vd + j)), i % 68);
          sc[i] = ref_dot(qv[n][p], ev);
        end
        // reference order: larger score first, earlier vector first on ties
        for (int i = 0; i < nvec[n]; i++) begin
          int pos = ord.size();
          for (int k = 0; k < ord.size(); k++)
            if (ref_better(sc[i], sc[ord[k]], 1'b1)) begin pos = k; break; end
          ord.insert(pos, i);
        end
        for (int k = 0; k < KK; k++) begin
          hread(haddr(n, p, 'h800 + 8 * k), d);
          checks++;
          if (k < nvec[n]) begin
            int    i  = ord[k];
            addr_t ea = base[n] + addr_t'(136 * vd * (i / 68) + 2 * (i % 68));
            if (d[63] !== 1'b1 || d[51:36] !== sc[i] || d[35:0] !== ea) begin
              failures++;
              $display("FAIL nma %0d pe %0d rank %0d: got v%0b %h @%h exp %h @%h",
                       n, p, k, d[63], d[51:36], d[35:0], sc[i], ea);
            end
          end else if (d[63] !== 1'b0) begin
            failures++;
            $display("FAIL nma %0d pe %0d rank %0d should be empty", n, p, k);
          end
        end
      end
      if (check_time && n == 0) begin
        longint cyc = t_done[0] - t_start;
        longint lo  = longint'(nblk * vd + 68);
        longint hi  = lo + LAT + 16;
        checks++;
        $display("nma 0: %0d vectors, VD %0d: %0d cycles (expected %0d..%0d)", nvec[0], vd, cyc, lo, hi);
        if (cyc < lo || cyc > hi) begin
          failures++;
          $display("FAIL cycle count");
        end
      end
    end
  endtask

  initial begin
    int nv [NNMA];
    int nq [NNMA];
    host_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nv = '{150};  nq = '{4};
    offload(32, nv, nq, 1'b0);
    nv = '{136};  nq = '{3};
    offload(80, nv, nq, 1'b0);
    $display("mechanisms: stall %0d ignored %0d partial-block %0d batch %0d mem-gap %0d",
             n_stall, n_ignored, n_partial, n_batch, n_gap);
    checks++; if (n_stall   == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (n_ignored == 0) begin failures++; $display("FAIL no ignored score"); end
    checks++; if (n_partial == 0) begin failures++; $display("FAIL no partial block"); end
    checks++; if (n_batch   == 0) begin failures++; $display("FAIL no batch"); end
    checks++; if (n_gap     == 0) begin failures++; $display("FAIL no memory gap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
