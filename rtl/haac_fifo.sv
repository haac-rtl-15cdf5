// haac_fifo: the streaming queue used for a gate engine's instruction, table and
// out-of-range-wire (OoRW) queues and for the live-wire write-back buffers.
//
// HAAC programs have no control flow, so instructions, tables and OoR wires are all
// consumed strictly in order and a queue replaces random-access memory. This is a
// synchronous show-ahead FIFO held as a register/RAM array: `out_data0` is the head and
// `out_data1` the entry behind it, so a consumer may pop one or two entries in a cycle
// (a gate whose two operands are both out of range takes two OoR wires at once).
// Push side: valid/ready. Pop side: `pop` removes the head, `pop2` the head and the
// next entry; popping more than `count` entries is an error (asserted).
// DEPTH must be a power of two. Reset empties the queue.
module haac_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [W-1:0]             in_data,
  output logic [W-1:0]             out_data0,
  output logic [W-1:0]             out_data1,
  output logic [$clog2(DEPTH):0]   count,
  input  logic                     pop,
  input  logic                     pop2
);
  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   cnt;
  logic          push;
  logic [1:0]    npop;

  assign in_ready  = (cnt != (PW+1)'(DEPTH));
  assign push      = in_valid & in_ready;
  assign npop      = pop2 ? 2'd2 : (pop ? 2'd1 : 2'd0);
  assign out_data0 = mem[rd_ptr];
  assign out_data1 = mem[rd_ptr + PW'(1)];
  assign count     = cnt;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + PW'(1);
      rd_ptr <= rd_ptr + PW'(npop);
      cnt    <= cnt + (PW+1)'(push) - (PW+1)'(npop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) (PW+1)'(npop) <= cnt)
    else $error("haac_fifo: pop from an empty queue");

endmodule
