// tb_topk_unit: streams random scores (with a few repeated values) into two
// top-K units, one keeping the largest and one the smallest scores, and
// compares the final ordered lists, addresses included, with a reference
// ordering computed on reals (ties: earlier score first). Also checks the
// inserted/ignored decisions and that clear empties the list.
module tb_topk_unit;
  import iks_pkg::*;
  import iks_tb_pkg::*;
  localparam int K = 32;
  localparam int NS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid;
  fp16_t in_score;
  addr_t in_addr;
  topk_entry_t [K-1:0] list_l, list_s;
  logic ins_l, ign_l, ins_s, ign_s;
  topk_unit #(.K(K), .KEEP_LARGEST(1'b1)) dut_l (.clk, .rst_n, .clear, .in_valid, .in_score,
    .in_addr, .list(list_l), .inserted(ins_l), .ignored(ign_l));
  topk_unit #(.K(K), .KEEP_LARGEST(1'b0)) dut_s (.clk, .rst_n, .clear, .in_valid, .in_score,
    .in_addr, .list(list_s), .inserted(ins_s), .ignored(ign_s));
  int checks = 0, failures = 0, n_ign = 0, n_ins = 0;
  logic [15:0] sc [NS];
  always @(posedge clk) begin
    if (rst_n && ign_l) n_ign++;
    if (rst_n && ins_l) n_ins++;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit largest, topk_entry_t [K-1:0] l);
    int ord [$];
    for (int i = 0; i < NS; i++) begin
      int pos = ord.size();
      for (int k = 0; k < ord.size(); k++)
        if (ref_better(sc[i], sc[ord[k]], largest)) begin pos = k; break; end
      ord.insert(pos, i);
    end
    for (int k = 0; k < K; k++) begin
      checks++;
      if (!l[k].valid || l[k].score !== sc[ord[k]] || l[k].addr !== addr_t'(ord[k] * 2)) begin
        failures++;
        $display("FAIL largest=%0b rank %0d: %h @%0d exp %h @%0d", largest, k,
                 l[k].score, l[k].addr, sc[ord[k]], ord[k] * 2);
      end
    end
  endtask
  initial begin
    clear = 0; in_valid = 0; in_score = 0; in_addr = 0;
    for (int i = 0; i < NS; i++)
      sc[i] = (i % 17 == 5) ? sc[i-3] : rand_fp16($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0) || 1'b1;
      in_score = sc[i];
      in_addr  = addr_t'(i * 2);
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(1'b1, list_l);
    check(1'b0, list_s);
    checks++;
    if (n_ins + n_ign != NS || n_ign == 0) begin
      failures++;
      $display("FAIL inserted %0d ignored %0d", n_ins, n_ign);
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    checks++;
    if (list_l[0].valid) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
