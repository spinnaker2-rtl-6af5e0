// sync_fifo -- single-clock FIFO used as input buffer in the routers and as
// the multicast event queue of a PE.
//
// DEPTH entries of WIDTH bits.  Write when wr_valid && wr_ready, read when
// rd_valid && rd_ready; the head entry is visible on rd_data while rd_valid
// is high (first-word fall-through).  wr_ready depends only on the stored
// count, so it never depends combinationally on rd_ready.  Depths are this
// design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  assign wr_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rd_ptr];
  assign level    = count;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end
endmodule
