// tb_noc_router -- random traffic on all eight inputs of a router at mesh
// site (3,2) with random destinations and random output back-pressure.
// Every packet carries a unique id; the expected output port is worked out
// here (X first, then Y, then dst.sub).  Checks: each packet leaves once, on
// the right port, and packets from one input to one output keep their order.
module tb_noc_router;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid [8], in_ready [8], out_valid [8], out_ready [8];
  noc_pkt_t in_pkt [8], out_pkt [8];

  noc_router #(.MY_X(3), .MY_Y(2)) dut (.*);

  function automatic int exp_port(node_t d);
    if (d.x > 3) return 5;
    if (d.x < 3) return 7;
    if (d.y > 2) return 6;
    if (d.y < 2) return 4;
    return int'(d.sub);
  endfunction

  int sent [8];
  int expect_q [8][8][$];   // [in][out] ids in order
  int delivered = 0;
  localparam int PER_INPUT = 300;

  for (genvar i = 0; i < 8; i++) begin : g_src
    initial begin
      in_valid[i] = 0;
      in_pkt[i] = '0;
      sent[i] = 0;
      wait (rst_n);
      while (sent[i] < PER_INPUT) begin
        @(negedge clk);
        if (!in_valid[i] && $urandom_range(0, 2) == 0) begin
          node_t d;
          d = '{x: 3'($urandom_range(0, 6)), y: 3'($urandom_range(0, 5)), sub: 3'($urandom_range(0, 7))};
          in_pkt[i] = '0;
          in_pkt[i].dst = d;
          in_pkt[i].src = node_t'(9'(i));
          in_pkt[i].payload = 128'(i * 100000 + sent[i]);
          in_valid[i] = 1;
          expect_q[i][exp_port(d)].push_back(i * 100000 + sent[i]);
        end
        @(posedge clk);
        if (in_valid[i] && in_ready[i]) begin
          sent[i]++;
          #1 in_valid[i] = 0;
        end
      end
    end
    always_ff @(posedge clk) out_ready[i] <= 1'($urandom_range(0, 3) != 0);
    always @(posedge clk) begin
      if (rst_n && out_valid[i] && out_ready[i]) begin
        int src, id;
        src = int'(out_pkt[i].src);
        id = int'(out_pkt[i].payload);
        checks++;
        if (expect_q[src][i].size() == 0 || expect_q[src][i][0] != id) begin
          failures++;
          $display("FAIL: packet %0d from input %0d on wrong port %0d or out of order", id, src, i);
        end else begin
          void'(expect_q[src][i].pop_front());
        end
        delivered++;
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (delivered == 8 * PER_INPUT);
    repeat (5) @(posedge clk);
    checks++;
    if (delivered != 8 * PER_INPUT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
