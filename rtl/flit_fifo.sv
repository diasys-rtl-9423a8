// flit_fifo: small synchronous FIFO for NoC flits.
//
// A circular buffer of DEPTH entries with a valid/ready interface on both
// sides. in_ready depends only on the fill level, never combinationally on
// out_ready, so a chain of FIFOs closed into a ring has no combinational
// loop. One flit in and one out per cycle; an empty FIFO delays a flit by one
// cycle. `free` reports the number of empty entries. This is a helper of this design, not a block named by the paper.
module flit_fifo
  import diasys_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit,
  input  logic  in_valid,
  output logic  in_ready,
  output flit_t out_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output logic [$clog2(DEPTH+1)-1:0] free
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_flit  = mem[rd_ptr];
  assign free      = (PW+1)'(DEPTH) - count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) begin
        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      end
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_flit;
  end
endmodule
