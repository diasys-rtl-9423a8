// dp_ram: program and data memory of the diagnosis processor.
//
// WORDS x 32-bit memory on a classic Wishbone slave port with byte selects.
// Every access is acknowledged one cycle after stb is seen (ack is
// registered and drops for one cycle between accesses); read data arrives
// together with ack. Addresses are byte addresses; bits above the memory
// size are ignored for in-range words, and accesses beyond WORDS read zero
// and do not write. The 30 kByte size (7680 words) is the paper's; the
// single-cycle SRAM timing is this design's choice.
module dp_ram
  import diasys_pkg::*;
#(
  parameter int unsigned WORDS = 7680
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_m2s,
  output wb_s2m_t wb_s2m
);
  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [AW-1:0] widx;
  logic          in_range;

  assign widx     = wb_m2s.adr[AW+1:2];
  assign in_range = (32'(widx) < WORDS) && (wb_m2s.adr[31:AW+2] == '0);

  logic        ack_q;
  logic [31:0] dat_q;
  assign wb_s2m = '{ack: ack_q, dat: dat_q};

  wire req = wb_m2s.cyc && wb_m2s.stb && !ack_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q <= 1'b0;
    end else begin
      ack_q <= req;
    end
  end

  always_ff @(posedge clk) begin
    if (req) begin
      dat_q <= in_range ? mem[widx] : '0;
      if (wb_m2s.we && in_range) begin
        for (int b = 0; b < 4; b++) begin
          if (wb_m2s.sel[b]) mem[widx][8*b +: 8] <= wb_m2s.dat[8*b +: 8];
        end
      end
    end
  end
endmodule
