// tb_config_unit: sends a Configure packet with three trees (entries spread
// over two beats), checks the stored children, parent ports and memory
// division, the Ack packet and its port; then delivers EoT reports from
// several analyzers (some in the same cycle) and checks that a flush request
// is raised exactly when a tree has seen as many EoT as it has children.
module tb_config_unit;
  import switchagg_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready;
  beat_t in_beat;
  logic [1:0] in_port;
  tree_cfg_t [3:0] cfg;
  logic [3:0] eot_valid;
  logic [3:0][1:0] eot_tree;
  logic flush_valid, flush_ready;
  logic [1:0] flush_tree;
  logic ack_valid, ack_ready;
  beat_t ack_beat;
  logic [1:0] ack_port;
  int checks = 0, failures = 0;
  int flushes[$];

  config_unit dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic eot(input logic [3:0] v, input logic [1:0] t0, input logic [1:0] t1);
    @(negedge clk);
    eot_valid = v; eot_tree = {t1, t1, t0, t0};
    @(negedge clk);
    eot_valid = '0;
  endtask

  initial begin
    bq_t q;
    beat_t bs[$];
    in_valid = 0; in_beat = '0; in_port = 2; eot_valid = '0; eot_tree = '0; ack_ready = 0;
    flush_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    push_l2(q, 48'h1, PT_CONFIGURE);
    q.push_back(8'd3); q.push_back(0); q.push_back(0); q.push_back(0);
    // <TreeID, children, parent, rsvd>
    q.push_back(8'd2); q.push_back(8'd3); q.push_back(8'd1); q.push_back(0);
    q.push_back(8'd0); q.push_back(8'd2); q.push_back(8'd3); q.push_back(0);
    q.push_back(8'd3); q.push_back(8'd1); q.push_back(8'd0); q.push_back(0);
    to_beats(q, bs);
    foreach (bs[i]) begin
      @(negedge clk); in_valid = 1; in_beat = bs[i];
      @(posedge clk); while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    chk(cfg[2].valid && cfg[2].children == 3 && cfg[2].parent == 1 && cfg[2].slot == 0, "tree 2");
    chk(cfg[0].valid && cfg[0].children == 2 && cfg[0].parent == 3 && cfg[0].slot == 1, "tree 0");
    chk(cfg[3].valid && cfg[3].children == 1 && cfg[3].parent == 0 && cfg[3].slot == 2, "tree 3");
    chk(!cfg[1].valid, "tree 1 unused");
    chk(cfg[2].shift == 2 && cfg[0].shift == 2, "3 trees -> quarter each");
    chk(ack_valid && ack_port == 2 && ack_beat.sop && ack_beat.eop &&
        ack_beat.data[14*8 +: 8] == PT_ACK1 && ack_beat.data[47:0] == 48'h5554_5352_5150, "ack");
    @(negedge clk); ack_ready = 1;
    @(negedge clk);
    chk(!ack_valid && in_ready, "ack taken");
    // EoT counting
    eot(4'b0001, 2, 0);                // tree 2: 1 of 3
    chk(!flush_valid, "no flush after 1 of 3");
    eot(4'b0011, 0, 0);                // tree 0: 2 of 2 in one cycle
    @(posedge clk); #1;
    chk(flushes.size() == 1 && flushes[0] == 0, "tree 0 flush");
    eot(4'b0110, 2, 2);                // tree 2: +2 -> 3 of 3
    @(posedge clk); #1;
    chk(flushes.size() == 2 && flushes[1] == 2, "tree 2 flush");
    eot(4'b1000, 0, 3);                // tree 3: 1 of 1
    @(posedge clk); #1;
    chk(flushes.size() == 3 && flushes[2] == 3, "tree 3 flush");
    eot(4'b0001, 0, 0);                // tree 0 again: 1 of 2
    @(posedge clk); #1;
    chk(flushes.size() == 3, "count restarted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && flush_valid && flush_ready) flushes.push_back(int'(flush_tree));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
