// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, the full/empty flags, the write counter and the full counter.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data, out_data;
  logic [3:0] level;
  logic [47:0] wr_count, full_count;
  int checks = 0, failures = 0;
  int model[$];
  longint exp_wr = 0, exp_full = 0;

  sync_fifo #(.T(logic [7:0]), .DEPTH(8)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < (cyc < 1500 ? 70 : 30);
      out_ready = ($urandom % 100) < (cyc < 1500 ? 30 : 70);
      in_data   = 8'($urandom);
      #1;
      chk(in_ready == (model.size() < 8), "in_ready");
      chk(out_valid == (model.size() > 0), "out_valid");
      if (out_valid) chk(out_data == 8'(model[0]), "data");
      chk(int'(level) == model.size(), "level");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) begin model.push_back(in_data); exp_wr++; end
      if (in_valid && !in_ready) exp_full++;
    end
    @(negedge clk);
    chk(wr_count == 48'(exp_wr), "wr_count");
    chk(full_count == 48'(exp_full), "full_count");
    chk(exp_full > 0, "fifo reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
