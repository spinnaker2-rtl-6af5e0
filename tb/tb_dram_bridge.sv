// tb_dram_bridge -- sends WRITE and READ_REQ packets to the DRAM bridge and
// serves its memory port from a model with random grant delay and random
// read latency.  Checks the stored data, the READ_RESP header (sent back to
// the requester, at the return address) and payload, and that other packet
// types are dropped.
module tb_dram_bridge;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 1;
  noc_pkt_t rx_pkt = '0, tx_pkt;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr;
  logic [127:0] mem_wdata, mem_rdata;

  dram_bridge #(.NODE(DRAM0_NODE)) dut (.*);

  logic [127:0] dram [int];
  logic g;
  always @(negedge clk) g = 1'($urandom_range(0, 1));
  assign mem_gnt = mem_req && g;
  int lat = 0;
  logic [31:0] ra;
  always @(posedge clk) begin
    mem_rvalid <= 0;
    if (mem_gnt && mem_we) dram[int'(mem_addr >> 4)] = mem_wdata;
    if (mem_gnt && !mem_we) begin lat = $urandom_range(1, 6); ra = mem_addr; end
    else if (lat > 0) begin
      lat--;
      if (lat == 0) begin
        mem_rvalid <= 1;
        mem_rdata  <= dram.exists(int'(ra >> 4)) ? dram[int'(ra >> 4)] : '0;
      end
    end
  end

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic send(input pkt_type_e t, input logic [31:0] a, input logic [127:0] p, input node_t src);
    @(negedge clk);
    rx_valid = 1;
    rx_pkt = '{ptype: t, dst: DRAM0_NODE, src: src, irq: 1'b0, addr: a, payload: p};
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    @(negedge clk);
    rx_valid = 0;
  endtask

  logic [127:0] ref_m [int];
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int a;
      node_t s;
      a = $urandom_range(0, 31) * 16 + 32'h4000_0000;
      s = '{x: 3'($urandom_range(0, 6)), y: 3'($urandom_range(0, 5)), sub: 3'($urandom_range(0, 3))};
      case ($urandom_range(0, 2))
        0: begin
          logic [127:0] d;
          d = {$urandom, $urandom, $urandom, $urandom};
          send(PKT_WRITE, a, d, s);
          ref_m[a >> 4] = d;
        end
        1: begin
          int t;
          t = 0;
          send(PKT_READ_REQ, a, 128'(32'h100 + n * 16), s);
          while (!tx_valid && t < 100) begin @(negedge clk); t++; end
          check(tx_valid && tx_pkt.ptype == PKT_READ_RESP && tx_pkt.dst == s && tx_pkt.src == DRAM0_NODE
                && tx_pkt.addr == 32'h100 + n * 16, "read response header");
          check(tx_pkt.payload == (ref_m.exists(a >> 4) ? ref_m[a >> 4] : 128'd0), "read response data");
          @(posedge clk);
        end
        default: begin
          send(PKT_MC, a, '1, s);
          repeat (3) @(posedge clk);
          check(!tx_valid && !mem_req, "multicast packet dropped");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
