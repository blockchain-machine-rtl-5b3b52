// sync_fifo: single-clock first-word-fall-through FIFO with valid/ready on
// both sides. Every buffer of the Blockchain Machine (block_fifo, tx_fifo,
// ends_fifo, rdset_fifo, wrset_fifo, res_fifo and the small buffers inside the
// block processor) is one of these.
//
// Storage is a register array of DEPTH words; out_data shows the oldest word
// whenever out_valid is high, so a read costs no latency. A word written into
// an empty FIFO is visible on the next cycle. in_ready is low only when full;
// a push and a pop may happen in the same cycle. Depths are chosen by the
// instantiating module; the design itself does not give them.
//
// Lint notes: rst_n is both the asynchronous reset of the flip-flops and the
// disable condition of the assertions, which lint reports as a net used both
// ways; that is intended.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  // Occupancy never leaves 0..DEPTH.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
