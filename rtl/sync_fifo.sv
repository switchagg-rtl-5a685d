// sync_fifo: single-clock FIFO used for the port queues, the queues in front
// of the front-end processing engines and the output queues.
//
// Standard valid/ready on both sides: a word is written when in_valid and
// in_ready are high and read when out_valid and out_ready are high. The head
// word is presented combinationally from the storage array. Besides the data
// it keeps the two counters the paper uses to show that an engine keeps up
// with line rate: how many words were written (wr_count) and how many cycles
// a writer found the FIFO full (full_count). Both counters saturate.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  T            in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output T            out_data,
  output logic [$clog2(DEPTH):0] level,
  output logic [47:0] wr_count,
  output logic [47:0] full_count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [$clog2(DEPTH):0] cnt;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH):0]);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd_ptr];
  assign level     = cnt;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr     <= '0;
      wr_ptr     <= '0;
      cnt        <= '0;
      wr_count   <= '0;
      full_count <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      cnt <= cnt + {{($clog2(DEPTH)){1'b0}}, do_wr} - {{($clog2(DEPTH)){1'b0}}, do_rd};
      if (do_wr && wr_count != '1) wr_count <= wr_count + 1'b1;
      if (in_valid && !in_ready && full_count != '1) full_count <= full_count + 1'b1;
    end
  end

  // Handshake rules: no write when full, no read when empty.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) cnt <= DEPTH[$clog2(DEPTH):0]);
endmodule
