// ddr3_model: behavioural stand-in for a channel's DDR3 memory and controller.
//
// Not synthesizable logic of the design: it answers the simple word port of
// buffer_ctrl in simulation. Writes are taken when `wr_ready` is high, reads
// when `rd_ready` is high; read data come back in order after LAT clocks.
// Ready is dropped at random in STALL_PCT percent of cycles (refresh, bank
// turn-around), or always while `stall_all` is set. Storage is an associative
// array, so the full 64M-word address space costs nothing until written.
module ddr3_model
  import wfd_pkg::*;
#(
  parameter int unsigned LAT       = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  stall_all,
  input  ddr_req_t              req,
  output logic                  wr_ready,
  output logic                  rd_ready,
  output logic                  rd_valid,
  output logic [DDR_DATA_W-1:0] rd_data,
  output int                    n_writes,
  output int                    n_stalls
);

  logic [DDR_DATA_W-1:0] mem [logic [DDR_ADDR_W-1:0]];
  logic                  vpipe [LAT];
  logic [DDR_DATA_W-1:0] dpipe [LAT];
  logic                  rdy;

  always_comb begin
    wr_ready = rdy;
    rd_ready = rdy;
    rd_valid = vpipe[LAT-1];
    rd_data  = dpipe[LAT-1];
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      rdy      <= 1'b0;
      n_writes <= 0;
      n_stalls <= 0;
      for (int i = 0; i < LAT; i++) begin vpipe[i] <= 1'b0; dpipe[i] <= '0; end
    end else begin
      rdy <= !stall_all && (($urandom % 100) >= STALL_PCT);
      if (!rdy) n_stalls <= n_stalls + 1;
      if (req.wr && rdy) begin
        mem[req.addr] = req.wdata;
        n_writes <= n_writes + 1;
      end
      vpipe[0] <= req.rd && rdy;
      dpipe[0] <= mem.exists(req.addr) ? mem[req.addr] : 16'hDEAD;
      for (int i = 1; i < LAT; i++) begin
        vpipe[i] <= vpipe[i-1];
        dpipe[i] <= dpipe[i-1];
      end
    end
  end

endmodule
