// sync_fifo: synchronous first-word-fall-through FIFO with a valid/ready
// handshake on both sides.
//
// It serves as the 5-entry instruction queue of the Rank-NMP, the instruction
// queue of the BG-NMP, the instruction buffer of the Bank-NMP, the request
// queue of the bank command decoder and the Rank-NMP output buffer. Any DEPTH
// of one or more is allowed (the 5-entry rank queue is not a power of two), so
// read and write pointers wrap explicitly. A write happens when in_valid and
// in_ready are both high, a read when out_valid and out_ready are; both may
// happen in the same cycle. in_ready is low when the FIFO is full, which is how
// back-pressure (a stall) reaches the sender. Only the depth of the rank queue
// comes from the paper; the handshake is this design's choice.
module sync_fifo #(
  parameter int WIDTH = 83,
  parameter int DEPTH = 5,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_wr     = in_valid & in_ready;
  assign do_rd     = out_valid & out_ready;

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= nxt(wp);
      if (do_rd) rp <= nxt(rp);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= in_data;

  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
endmodule
