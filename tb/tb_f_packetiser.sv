// tb_f_packetiser: a reduced packetiser (16 channels, 32-sample windows, so
// 4 payload words per packet, 3 X-engine nodes, 15 channels used, this board
// is node 1) receives three windows of random channel-ordered data while
// each output port sees random back-pressure.  The testbench predicts, per
// port, the exact packet sequence (header word with timestamp, antenna and
// global channel id; destination node; payload words) from the routing rule
// and checks every output word, sop/eop framing, that the unused channel is
// dropped, that all three ports carried traffic and that no FIFO overflowed.
module tb_f_packetiser;
  import ami_pkg::*;
  localparam int NCHAN = 16, TW = 32, G = TW / 8, NN = 3, CU = 15, NODE = 1, NWIN = 3;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [63:0] in_data = 0;
  logic [3:0] in_chan = 0;
  logic [1:0] in_word = 0;
  logic [39:0] in_win = 0;
  logic [2:0] out_valid, out_sop, out_eop, out_ready = 0;
  logic [2:0][63:0] out_data;
  logic [2:0][7:0] out_dest;
  logic overflow;
  int checks = 0, failures = 0;
  logic [71:0] q [3][$];   // {sop, dest, word}
  int npk [3];
  always #1 clk = ~clk;

  f_packetiser #(.NCHAN(NCHAN), .T_WIN(TW), .N_NODES(NN), .CH_USED(CU)) dut (
    .clk, .rst, .ant_id(8'd5), .band(1'b1), .node_id(8'(NODE)), .in_valid, .in_data, .in_chan,
    .in_word, .in_win, .out_valid, .out_data, .out_sop, .out_eop, .out_dest, .out_ready,
    .overflow);

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NWIN; n++)
      for (int c = 0; c < NCHAN; c++)
        for (int w = 0; w < G; w++) begin
          logic [63:0] d;
          int p, dst;
          d = {$urandom, $urandom};
          in_valid <= 1; in_data <= d; in_chan <= 4'(c); in_word <= 2'(w); in_win <= 40'(n);
          dst = c % NN;
          p = (dst == NODE) ? 2 : (c / NN) % 2;
          if (c < CU) begin
            pkt_hdr_t h;
            h.timestamp = 40'(n); h.ant = 8'd5; h.chan = 16'(NCHAN + c);
            if (w == 0) q[p].push_back({1'b1, 7'(dst), 64'(h)});
            q[p].push_back({1'b0, 7'(dst), d});
          end
          @(posedge clk);
        end
    in_valid <= 0;
    repeat (200) @(posedge clk);
    for (int p = 0; p < 3; p++) begin
      checks += 2;
      if (q[p].size() != 0) begin failures++; $display("port %0d: %0d words never sent", p, q[p].size()); end
      if (npk[p] == 0) begin failures++; $display("port %0d carried nothing", p); end
    end
    checks++;
    if (overflow) begin failures++; $display("overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The header is queued when the last payload word arrives, so each port
  // sends header, payload, header, payload ... in arrival order.
  always @(posedge clk) begin
    if (!rst)
      for (int p = 0; p < 3; p++)
        if (out_valid[p] && out_ready[p]) begin
          logic [71:0] e;
          checks++;
          if (q[p].size() == 0) begin failures++; $display("port %0d: unexpected word", p); end
          else begin
            e = q[p].pop_front();
            if (out_sop[p] != e[71] || out_data[p] != e[63:0] ||
                (e[71] && out_dest[p] != 8'(e[70:64]))) begin
              failures++;
              if (failures < 8) $display("port %0d mismatch: got %h sop %b, want %h", p, out_data[p], out_sop[p], e);
            end
            if (e[71]) npk[p]++;
            if (out_eop[p] != (q[p].size() == 0 ? 1'b1 : q[p][0][71])) begin
              // eop must mark the word before the next header (or the end)
              if (q[p].size() != 0 || out_eop[p] != 1'b1) failures++;
            end
          end
        end
    for (int p = 0; p < 3; p++) out_ready[p] <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
