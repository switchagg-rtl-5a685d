// tb_mem_ctrl: the memory controller in front of the DRAM model (25-cycle
// reads). Random writes and reads to a small address set, with random
// back-pressure on the response side; every read must return the data of the
// latest earlier write to its address, in order. Also checks that a read takes
// the DRAM latency plus the FIFO stages, and that back-to-back reads are
// pipelined (many in flight at once).
module tb_mem_ctrl;
  import switchagg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, cmd_we, rsp_valid, rsp_ready;
  logic [39:0] cmd_addr;
  bucket_t cmd_wdata, rsp_data;
  logic dram_cmd_valid, dram_cmd_ready, dram_cmd_we, dram_rsp_valid;
  logic [39:0] dram_cmd_addr;
  bucket_t dram_cmd_wdata, dram_rsp_data;
  int checks = 0, failures = 0;
  bucket_t shadow [logic [39:0]];
  bucket_t exp_q[$];
  bit rnd_ready = 1;
  int t_issue, t_ret, n_ret = 0;

  mem_ctrl #(.CMD_DEPTH(8), .RSP_DEPTH(32)) dut (.*);
  dram_model #(.LAT(25)) u_dram (.clk, .rst_n, .cmd_valid(dram_cmd_valid), .cmd_ready(dram_cmd_ready),
    .cmd_we(dram_cmd_we), .cmd_addr(dram_cmd_addr), .cmd_wdata(dram_cmd_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  function automatic bucket_t rnd_bucket();
    bucket_t b;
    for (int i = 0; i < $bits(bucket_t) / 32 + 1; i++) b = {b, $urandom};
    return b;
  endfunction

  task automatic issue(input bit we, input logic [39:0] a, input bucket_t d);
    @(negedge clk); cmd_valid = 1; cmd_we = we; cmd_addr = a; cmd_wdata = d;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    if (we) shadow[a] = d;
    else exp_q.push_back(shadow.exists(a) ? shadow[a] : '0);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    int cyc;
    cmd_valid = 0; cmd_we = 0; cmd_addr = 0; cmd_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single read latency
    rnd_ready = 0;
    issue(1, 40'h40, rnd_bucket());
    repeat (40) @(posedge clk);
    t_issue = $time;
    issue(0, 40'h40, '0);
    @(posedge clk); while (!(rsp_valid)) @(posedge clk);
    t_ret = $time;
    checks++;
    if ((t_ret - t_issue) / 10 < 25 || (t_ret - t_issue) / 10 > 30) begin
      failures++; $display("read latency %0d cycles", (t_ret - t_issue) / 10);
    end
    repeat (5) @(posedge clk);
    // pipelined reads: 32 reads back to back
    cyc = 0;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); cmd_valid = 1; cmd_we = 0; cmd_addr = 40'(i * 64);
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      exp_q.push_back(shadow.exists(40'(i * 64)) ? shadow[40'(i * 64)] : '0);
    end
    @(negedge clk); cmd_valid = 0;
    while (exp_q.size() > 0) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc > 45) begin failures++; $display("32 reads drained in %0d cycles after issue", cyc); end
    // random mix with back-pressure
    rnd_ready = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [39:0] a;
      a = 40'(($urandom % 24) * 64);
      issue($urandom % 2, a, rnd_bucket());
    end
    repeat (200) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d responses missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) rsp_ready = rnd_ready ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    checks++;
    if (exp_q.size() == 0 || rsp_data !== exp_q[0]) begin failures++; if (failures < 5) $display("wrong read data"); end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
