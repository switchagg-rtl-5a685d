// mem_ctrl: memory controller between the back-end engine and the DRAM.
//
// The DRAM answers a read only after about 25 cycles, so the controller
// decouples the engine from it: read and write commands go into a command
// FIFO and are issued to the DRAM in order, one per cycle; read data comes
// back into a response FIFO from which the engine takes it. A read is only
// accepted while the reads in flight plus the responses waiting fit into the
// response FIFO, so the DRAM side never needs back-pressure on responses.
// Because commands stay in order, a read issued after a write to the same
// address sees the written data.
//
// The paper states that the controller buffers read/write commands and
// returns results to pipeline the processing; FIFO depths and the credit rule
// are this design's choices.
module mem_ctrl
  import switchagg_pkg::*;
#(
  parameter int unsigned CMD_DEPTH = 8,
  parameter int unsigned RSP_DEPTH = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // engine side
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  logic          cmd_we,
  input  logic [39:0]   cmd_addr,
  input  bucket_t       cmd_wdata,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output bucket_t       rsp_data,
  // DRAM side
  output logic          dram_cmd_valid,
  input  logic          dram_cmd_ready,
  output logic          dram_cmd_we,
  output logic [39:0]   dram_cmd_addr,
  output bucket_t       dram_cmd_wdata,
  input  logic          dram_rsp_valid,
  input  bucket_t       dram_rsp_data
);
  typedef struct packed {
    logic        we;
    logic [39:0] addr;
    bucket_t     wdata;
  } cmd_t;

  localparam int unsigned CRW = $clog2(RSP_DEPTH) + 1;
  logic [CRW-1:0] credits_used;   // reads in flight or waiting in the response FIFO
  logic           c_in_ready, c_out_valid;
  cmd_t           c_out;
  logic           r_in_ready;
  logic [$clog2(CMD_DEPTH):0] c_level;
  logic [$clog2(RSP_DEPTH):0] r_level;
  logic [47:0]    c_wr, c_full, r_wr, r_full;

  wire rd_ok    = cmd_we || (credits_used < CRW'(RSP_DEPTH));
  assign cmd_ready = c_in_ready && rd_ok;

  sync_fifo #(.T(cmd_t), .DEPTH(CMD_DEPTH)) u_cmd (
    .clk, .rst_n,
    .in_valid(cmd_valid && rd_ok), .in_ready(c_in_ready),
    .in_data('{we: cmd_we, addr: cmd_addr, wdata: cmd_wdata}),
    .out_valid(c_out_valid), .out_ready(dram_cmd_ready), .out_data(c_out),
    .level(c_level), .wr_count(c_wr), .full_count(c_full));

  assign dram_cmd_valid = c_out_valid;
  assign dram_cmd_we    = c_out.we;
  assign dram_cmd_addr  = c_out.addr;
  assign dram_cmd_wdata = c_out.wdata;

  sync_fifo #(.T(bucket_t), .DEPTH(RSP_DEPTH)) u_rsp (
    .clk, .rst_n,
    .in_valid(dram_rsp_valid), .in_ready(r_in_ready), .in_data(dram_rsp_data),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp_data),
    .level(r_level), .wr_count(r_wr), .full_count(r_full));

  wire rd_acc = cmd_valid && cmd_ready && !cmd_we;
  wire rd_ret = rsp_valid && rsp_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits_used <= '0;
    else credits_used <= credits_used + CRW'(rd_acc) - CRW'(rd_ret);
  end

  a_rsp_space: assert property (@(posedge clk) disable iff (!rst_n) dram_rsp_valid |-> r_in_ready);
endmodule
