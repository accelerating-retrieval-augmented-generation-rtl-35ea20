// tb_context_buffer: checks the host address decode of one NMA's context
// buffers: configuration registers written and read back, the doorbell set
// by the host and cleared by done, query-scratchpad writes and reads
// steered to the right engine with the element index, output-scratchpad
// reads steered to the right engine with the entry index.
module tb_context_buffer;
  import iks_pkg::*;
  localparam int NPE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  host_req_t host_req;
  host_rsp_t host_rsp;
  logic [NPE-1:0] qh_en, oh_en;
  logic qh_we, doorbell, done;
  logic [9:0] qh_addr;
  fp16_t qh_wdata;
  fp16_t [NPE-1:0] qh_rdata;
  logic [4:0] oh_idx;
  logic [NPE-1:0][63:0] oh_rdata;
  offload_ctx_t ctx;
  context_buffer #(.NPE(NPE), .QDEPTH(1024), .K(32)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic hw(int a, logic [63:0] d);
    @(negedge clk); host_req = '{valid: 1'b1, we: 1'b1, addr: HOST_ADDR_W'(a), wdata: d};
  endtask
  task automatic hr(int a, output logic [63:0] d);
    @(negedge clk); host_req = '{valid: 1'b1, we: 1'b0, addr: HOST_ADDR_W'(a), wdata: '0};
    @(negedge clk); host_req = '0;
    d = host_rsp.rdata;
    chk(host_rsp.valid, "read response valid");
  endtask
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [63:0] d;
    host_req = '0; done = 0;
    for (int p = 0; p < NPE; p++) begin qh_rdata[p] = 16'(16'hA000 + p); oh_rdata[p] = 64'(64'hB0000 + p); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    hw('h2C00, 64'h2_3456_7890); hw('h1C08, 64'd768); hw('hC10, 64'd1000); hw('h3C18, 64'd3);
    @(negedge clk); host_req = '0;
    chk(ctx.base == 36'h2_3456_7890 && ctx.vd == 11'd768 && ctx.nvec == 32'd1000 && ctx.nq == 7'd3, "context registers");
    hr('hC08, d); chk(d == 64'd768, "VD read-back");
    hw('h1C20, 64'd1);
    @(negedge clk); host_req = '0;
    chk(doorbell, "doorbell set by host");
    hr('hC20, d); chk(d == 64'd1, "doorbell read");
    @(negedge clk); done = 1;
    @(negedge clk); done = 0;
    chk(!doorbell, "doorbell cleared by NMA");
    // query scratchpad write to engine 2, element 5
    @(negedge clk); host_req = '{valid: 1'b1, we: 1'b1, addr: HOST_ADDR_W'('h200A), wdata: 64'hBEEF};
    #1 chk(qh_en == 4'b0100 && qh_we && qh_addr == 10'd5 && qh_wdata == 16'hBEEF, "query write steering");
    @(negedge clk); host_req = '0;
    hr('h3010, d); chk(d == 64'hA003, "query read from engine 3");
    @(negedge clk); host_req = '{valid: 1'b1, we: 1'b0, addr: HOST_ADDR_W'('h1818), wdata: '0};
    #1 chk(oh_en == 4'b0010 && oh_idx == 5'd3, "output read steering");
    @(negedge clk); host_req = '0;
    chk(host_rsp.rdata == 64'hB0001, "output read data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
