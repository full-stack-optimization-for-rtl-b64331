// tb_bus_switch: 4 ports, every source sends a numbered stream of packets to
// random destinations while destinations are randomly not ready. Checks:
// one transfer per cycle at most, a packet only goes to its destination and
// only when that destination is ready, each source's packets arrive in order,
// all packets arrive, and the arbiter rotates (every source wins while
// all four compete).
module tb_bus_switch;
  import rtm_ap_pkg::*;
  localparam int NP = 4, DW = 16, PER = 60;
  logic clk = 0, rst_n = 0, busy;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  pkt_hdr_t [NP-1:0] in_hdr;
  pkt_hdr_t out_hdr;
  logic [NP-1:0][DW-1:0] in_data;
  logic [NP-1:0][1:0] in_dport;
  logic [DW-1:0] out_data;
  bus_switch #(.NPORT(NP), .DW(DW)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cnt [NP], next_rx [NP], total = 0, contested = 0;
  int wins_all [NP];

  for (genvar i = 0; i < NP; i++) begin : g_src
    assign in_valid[i] = cnt[i] < PER;
    assign in_data[i]  = DW'(i * 256 + cnt[i]);
    assign in_dport[i] = 2'((i * 7 + cnt[i] * 3) % NP);
    assign in_hdr[i]   = '{kind: PK_WR, dst: '0, src: '{tile: 3'(i), ep: '0}, addr: BADR_W'(cnt[i])};
  end

  always_ff @(posedge clk) if (rst_n) begin
    int n;
    n = 0;
    out_ready <= NP'($urandom);
    for (int i = 0; i < NP; i++) if (in_ready[i]) begin
      n++;
      cnt[i] <= cnt[i] + 1;
    end
    checks++;
    if (n > 1 || $countones(out_valid) != n || busy != (n == 1)) failures++;
    if (n == 1) begin
      int s, d;
      s = int'(out_hdr.src.tile);
      d = int'(in_dport[s]);
      checks++;
      if (!in_ready[s] || !out_valid[d] || !out_ready[d] || out_data != DW'(s * 256 + next_rx[s])
          || out_hdr.addr != BADR_W'(next_rx[s])) begin
        failures++; $display("bad transfer src %0d", s);
      end
      next_rx[s] <= next_rx[s] + 1;
      total <= total + 1;
      if (in_valid == '1) wins_all[s] <= wins_all[s] + 1;
    end
    // a transfer was possible but none happened
    for (int i = 0; i < NP; i++)
      if (in_valid[i] && out_ready[in_dport[i]] && n == 0) begin
        failures++; $display("idle bus with eligible input %0d", i);
      end
  end

  initial begin : main
    foreach (cnt[i]) begin cnt[i] = 0; next_rx[i] = 0; wins_all[i] = 0; end
    out_ready = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2000) @(posedge clk);
    checks++;
    if (total != NP * PER) begin failures++; $display("delivered %0d", total); end
    for (int i = 0; i < NP; i++) begin
      checks++;
      if (wins_all[i] == 0) begin failures++; $display("source %0d starved", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
