// dram_model: behavioural model of the DRAM behind the back-end engine, for
// simulation only (kind: behavioural model, not synthesizable).
//
// Accepts one read or write command per cycle and answers each read after
// LAT cycles, in order. Storage is sparse (an associative array keyed by the
// byte address), so even a multi-gigabyte address space costs only the lines
// that were written; unwritten lines read as zero.
module dram_model
  import switchagg_pkg::*;
#(
  parameter int unsigned LAT = 25
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic        cmd_we,
  input  logic [39:0] cmd_addr,
  input  bucket_t     cmd_wdata,
  output logic        rsp_valid,
  output bucket_t     rsp_data
);
  bucket_t     store [logic [39:0]];
  bucket_t     pipe_d [LAT];
  logic [LAT-1:0] pipe_v;
  longint unsigned reads, writes;

  assign cmd_ready = 1'b1;
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe_v <= '0;
      reads  <= 0;
      writes <= 0;
    end else begin
      pipe_v <= {pipe_v[LAT-2:0], cmd_valid && !cmd_we};
      for (int i = LAT - 1; i > 0; i--) pipe_d[i] <= pipe_d[i-1];
      if (cmd_valid && !cmd_we) begin
        pipe_d[0] <= store.exists(cmd_addr) ? store[cmd_addr] : '0;
        reads <= reads + 1;
      end
      if (cmd_valid && cmd_we) begin
        if (cmd_wdata == '0) store.delete(cmd_addr);
        else store[cmd_addr] = cmd_wdata;
        writes <= writes + 1;
      end
    end
  end
endmodule
