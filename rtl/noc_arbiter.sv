// noc_arbiter: packet-level round-robin merge of N flit streams into one.
//
// When the output is free, the next requesting input after the last winner
// is granted and keeps the output until its flit marked `last` has been
// accepted, so packets never interleave. The grant decision is combinational
// on in_valid; there is no storage, so the path from out_ready to in_ready is
// combinational. Round-robin packet arbitration is this design's choice.
module noc_arbiter
  import diasys_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  flit_t [N-1:0]  in_flit,
  input  logic  [N-1:0]  in_valid,
  output logic  [N-1:0]  in_ready,
  output flit_t          out_flit,
  output logic           out_valid,
  input  logic           out_ready
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] owner, last_grant, sel;
  logic          sel_valid;

  // Round-robin pick among requesters when not locked
  logic [IW-1:0] idx;

  always_comb begin
    idx       = '0;
    sel       = owner;
    sel_valid = locked;
    if (!locked) begin
      for (int k = N; k >= 1; k--) begin
        idx = IW'((int'(last_grant) + k) % N);
        if (in_valid[idx]) begin
          sel       = idx;
          sel_valid = 1'b1;
        end
      end
    end
  end

  always_comb begin
    in_ready  = '0;
    out_flit  = in_flit[sel];
    out_valid = sel_valid && in_valid[sel];
    if (sel_valid) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked     <= 1'b0;
      owner      <= '0;
      last_grant <= IW'(N - 1);
    end else if (out_valid && out_ready) begin
      if (out_flit.last) begin
        locked     <= 1'b0;
        last_grant <= sel;
      end else begin
        locked <= 1'b1;
        owner  <= sel;
      end
    end
  end
endmodule
