// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Helper used by the channel buffer controller to absorb memory stalls and to
// hold read data before the channel link. `wr` is ignored when full and `rd`
// when empty; `count` gives the occupancy. Storage is a plain array, read
// combinationally at the read pointer.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr,
  input  logic [WIDTH-1:0]          wdata,
  input  logic                      rd,
  output logic [WIDTH-1:0]          rdata,
  output logic                      empty,
  output logic                      full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  always_comb begin
    empty = (count == 0);
    full  = (count == ($clog2(DEPTH+1))'(DEPTH));
    do_wr = wr && !full;
    do_rd = rd && !empty;
    rdata = mem[rp];
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_wr) - ($clog2(DEPTH+1))'(do_rd);
    end
  end

endmodule
