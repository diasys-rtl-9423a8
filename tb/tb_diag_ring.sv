// tb_diag_ring: self-checking test of the ring diagnosis NoC.
//
// First a single packet from node 0 to node 3 on an idle ring: its first
// flit must appear at node 3 three cycles after injection (one per hop).
// Then every node sends random-length packets to random destinations
// (including itself, which travels once around the ring) while every node
// applies random back-pressure. Each packet carries its source and a
// per-source sequence number; the receiver checks destination, contents,
// per-source order and that packets are never interleaved, and at the end
// that every packet arrived exactly once.
module tb_diag_ring;
  import diasys_pkg::*;
  localparam int N = 6;
  localparam int PKTS = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t [N-1:0] local_in_flit, local_out_flit;
  logic [N-1:0] local_in_valid, local_in_ready, local_out_valid, local_out_ready;

  diag_ring #(.NODES(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  bit random_bp = 0;
  int received = 0;
  int last_seq [N][N];       // [dst][src]
  always begin
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) local_out_ready[i] = random_bp ? 1'($urandom_range(0, 1)) : 1'b1;
  end

  // receivers
  for (genvar d = 0; d < N; d++) begin : g_rx
    initial begin
      int pos, src, seq, len;
      pos = 0;
      forever begin
        @(negedge clk);
        if (local_out_valid[d] && local_out_ready[d]) begin
          unique case (pos)
            0: chk(local_out_flit[d].data == hdr_flit(PKT_EVENT, 8'(d)), $sformatf("dest at node %0d", d));
            1: src = int'(local_out_flit[d].data);
            2: begin
                 seq = int'(local_out_flit[d].data);
                 chk(seq == last_seq[d][src] + 1, $sformatf("order at %0d from %0d: %0d after %0d", d, src, seq, last_seq[d][src]));
                 last_seq[d][src] = seq;
               end
            3: len = int'(local_out_flit[d].data);
            default: chk(local_out_flit[d].data == 16'(src * 256 + pos), "payload (packets not interleaved)");
          endcase
          if (local_out_flit[d].last) begin
            chk(pos == len - 1, "packet length");
            received++;
            pos = 0;
          end else pos++;
        end
      end
    end
  end

  task automatic send(input int s, input int d, input int seq, input int len);
    for (int p = 0; p < len; p++) begin
      logic [15:0] w;
      unique case (p)
        0: w = hdr_flit(PKT_EVENT, 8'(d));
        1: w = 16'(s);
        2: w = 16'(seq);
        3: w = 16'(len);
        default: w = 16'(s * 256 + p);
      endcase
      local_in_flit[s].data = w; local_in_flit[s].last = (p == len - 1);
      local_in_valid[s] = 1;
      forever begin @(negedge clk); if (local_in_ready[s]) break; end
      @(posedge clk); #2;
      local_in_valid[s] = 0;
      if (random_bp && $urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: received %0d", received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    local_in_valid = '0; local_in_flit = '0; local_out_ready = '1;
    foreach (last_seq[i, j]) last_seq[i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // latency on an idle ring: 0 -> 3 is three hops
    fork
      send(0, 3, 1, 4);
      begin
        @(negedge clk); t0 = 0;
        while (!local_out_valid[3]) begin @(negedge clk); t0++; end
        chk(t0 == 3, $sformatf("first flit after %0d cycles, expected 3 hops", t0));
      end
    join
    repeat (10) @(posedge clk); #1;
    chk(received == 1, "single packet received");
    // random all-to-all traffic
    random_bp = 1;
    for (int s = 0; s < N; s++) begin
      automatic int ss = s;
      fork
        begin
          automatic int seqs [N];
          foreach (seqs[i]) seqs[i] = (ss == 0 && i == 3) ? 1 : 0;
          for (int k = 0; k < PKTS; k++) begin
            automatic int d;
            d = $urandom_range(0, N - 1);
            seqs[d]++;
            send(ss, d, seqs[d], $urandom_range(4, 12));
          end
        end
      join_none
    end
    wait fork;
    repeat (500) @(posedge clk);
    chk(received == 1 + N * PKTS, $sformatf("received %0d of %0d", received, 1 + N * PKTS));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
