// tb_pe_scheduler: eight engines offer numbered pairs at random; the back end
// takes them with random back-pressure. Checks that every pair arrives once
// and in order per engine, and that while all engines keep requesting each is
// granted within eight grants (round-robin fairness).
module tb_pe_scheduler;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] in_valid, in_ready;
  kv_t [7:0] in_kv;
  logic out_valid, out_ready, busy;
  kv_t out_kv;
  int checks = 0, failures = 0;
  kv_t src_q [8][$];
  kv_t exp_q [8][$];
  int last_grant [8];
  int grants = 0;
  bit saturate = 0;
  int sat_start = -1;

  pe_scheduler #(.N(8)) dut (.*);

  initial begin
    for (int e = 0; e < 8; e++) begin
      last_grant[e] = 0;
      for (int n = 0; n < 300; n++) begin
        kv_t k;
        k = '0; k.value = 32'(e * 100000 + n); k.key[7:0] = 8'(e);
        src_q[e].push_back(k); exp_q[e].push_back(k);
      end
    end
    in_valid = '0; in_kv = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (src_q[0].size() + src_q[1].size() + src_q[2].size() + src_q[3].size() +
           src_q[4].size() + src_q[5].size() + src_q[6].size() + src_q[7].size() > 0) begin
      @(negedge clk);
      saturate = src_q[0].size() > 100 && src_q[0].size() < 200;
      if (saturate && sat_start < 0) sat_start = grants;
      for (int e = 0; e < 8; e++) begin
        in_valid[e] = src_q[e].size() > 0 && (saturate || $urandom % 3 == 0);
        if (src_q[e].size() > 0) in_kv[e] = src_q[e][0];
      end
      @(posedge clk);
      for (int e = 0; e < 8; e++) if (in_valid[e] && in_ready[e]) begin
        void'(src_q[e].pop_front());
        if (saturate) begin
          checks++;
          if (last_grant[e] > sat_start && sat_start >= 0 && grants - last_grant[e] > 8) begin failures++; $display("engine %0d starved", e); end
        end
        grants++;
        last_grant[e] = grants;
      end
    end
    @(negedge clk); in_valid = '0;
    repeat (50) @(posedge clk);
    for (int e = 0; e < 8; e++) begin
      checks++;
      if (exp_q[e].size() != 0) begin failures++; $display("engine %0d: %0d missing", e, exp_q[e].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = saturate ? 1'b1 : ($urandom % 4 != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    e = int'(out_kv.key[7:0]);
    checks++;
    if (exp_q[e].size() == 0 || out_kv !== exp_q[e][0]) begin failures++; if (failures < 5) $display("bad pair"); end
    else void'(exp_q[e].pop_front());
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
