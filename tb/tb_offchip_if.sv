// tb_offchip_if: self-checking testbench of the off-chip interface.
//
// Host -> chip: random length-prefixed word streams (with some zero-length
// frames that must be ignored) are offered with random gaps while the NoC
// side applies random backpressure; every NoC packet must equal the frame,
// with `last` on the final flit only. Chip -> host: random NoC packets of 1
// to 64 flits, plus an 80-flit packet that is cut to MAX_PKT words, must come
// out as {length, flits} under random host backpressure. Both directions run
// at the same time. Inputs change 1-2 ns after the rising edge; handshakes
// are sampled on the falling edge. A watchdog ends a hang with a failure.
module tb_offchip_if;
  import diasys_pkg::*;
  localparam int unsigned MAX_PKT = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] host_in_data, host_out_data;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  flit_t rx_flit, tx_flit;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  int checks = 0, failures = 0;

  offchip_if #(.MAX_PKT(MAX_PKT)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always begin @(posedge clk); #1; tx_ready = 1'($urandom); host_out_ready = ($urandom % 4) != 0; end

  typedef logic [15:0] fl_t [$];
  fl_t to_chip [$], to_host [$];
  fl_t got_noc [$], got_host [$];
  fl_t cur_noc, cur_host;
  int host_words_left = -1;

  // monitors
  initial forever begin
    @(negedge clk);
    if (tx_valid && tx_ready) begin
      cur_noc.push_back(tx_flit.data);
      if (tx_flit.last) begin got_noc.push_back(cur_noc); cur_noc = {}; end
    end
    if (host_out_valid && host_out_ready) begin
      if (host_words_left < 0) host_words_left = host_out_data;
      else begin cur_host.push_back(host_out_data); host_words_left--; end
      if (host_words_left == 0) begin got_host.push_back(cur_host); cur_host = {}; host_words_left = -1; end
    end
  end

  task automatic host_word(input logic [15:0] w);
    host_in_data = w; host_in_valid = 1;
    forever begin @(negedge clk); if (host_in_ready) break; end
    @(posedge clk); #2;
    host_in_valid = 0;
    repeat ($urandom_range(1)) @(posedge clk);
    #2;
  endtask

  task automatic noc_pkt(input fl_t f);
    foreach (f[i]) begin
      rx_flit.data = f[i]; rx_flit.last = (i == f.size() - 1); rx_valid = 1;
      forever begin @(negedge clk); if (rx_ready) break; end
      @(posedge clk); #2;
      rx_valid = 0;
      if ($urandom_range(3) == 0) begin @(posedge clk); #2; end
    end
  endtask

  initial begin
    host_in_valid = 0; host_in_data = 0; rx_valid = 0; rx_flit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #2;
    fork
      for (int k = 0; k < 40; k++) begin
        automatic fl_t f;
        automatic int n = $urandom_range(1, 30);
        if (k % 10 == 3) host_word(16'd0);              // empty frame, ignored
        for (int i = 0; i < n; i++) f.push_back(16'($urandom));
        to_chip.push_back(f);
        host_word(16'(n));
        foreach (f[i]) host_word(f[i]);
      end
      for (int k = 0; k < 40; k++) begin
        automatic fl_t f, e;
        automatic int n = (k == 20) ? 80 : $urandom_range(1, MAX_PKT);
        for (int i = 0; i < n; i++) f.push_back(16'($urandom));
        e = f;
        while (e.size() > MAX_PKT) void'(e.pop_back());
        to_host.push_back(e);
        noc_pkt(f);
      end
    join
    repeat (400) @(posedge clk);
    chk(got_noc.size() == to_chip.size(), $sformatf("host->chip packets %0d/%0d", got_noc.size(), to_chip.size()));
    foreach (got_noc[k]) if (k < to_chip.size()) chk(got_noc[k] == to_chip[k], $sformatf("host->chip packet %0d size %0d/%0d", k, got_noc[k].size(), to_chip[k].size()));
    chk(got_host.size() == to_host.size(), $sformatf("chip->host packets %0d/%0d", got_host.size(), to_host.size()));
    foreach (got_host[k]) if (k < to_host.size()) chk(got_host[k] == to_host[k], $sformatf("chip->host packet %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3ms;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
