// buffer_ctrl: DDR3 buffer manager of one channel.
//
// Samples chosen by the acquisition logic (a pattern window in synchronous
// mode, a pre/post-trigger window in asynchronous mode) are written to the
// channel's DDR3 memory at consecutive word addresses, one 12-bit sample per
// 16-bit word. On a readout request the stored words are read back in order
// and sent over the channel link to the controller FPGA, after which the
// buffer is empty again. The published design gives the per-channel 1-Gbit
// DDR3 buffer and the readout by the controller; the memory port, the FIFOs,
// the header and the overflow policy are this design's choices.
//
// Memory port: `mem_req` carries a write (wr, addr, wdata) taken when
// `mem_wr_ready` is high, or a read (rd, addr) taken when `mem_rd_ready` is
// high. Read data return in request order on `mem_rd_valid`/`mem_rd_data`,
// with any latency. This stands in for the DDR3 controller and PHY.
//
// Write path: a FIFO of FIFO_DEPTH samples absorbs cycles in which the memory
// is not ready. A sample that finds the FIFO full, the memory full (2**ADDR_W
// words) or a readout in progress is dropped and sets the sticky `overflow`.
//
// Readout: the FIFO is drained first, then two header words go out,
// {overflow, 4'b0, count[26:16]} flagged `first` and count[15:0], followed by
// the samples; the final word of the frame carries `last`. Reads are issued
// only while the read FIFO plus reads in flight leave room, so read data never
// find the read FIFO full. `link_valid` is held until `link_ready`.
module buffer_ctrl
  import wfd_pkg::*;
#(
  parameter int unsigned ADDR_W     = 26,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // samples to store
  input  logic                  in_valid,
  input  sample_t               in_data,
  // control
  input  logic                  ro_start,
  input  logic                  clear,
  // DDR3 word port
  output ddr_req_t              mem_req,
  input  logic                  mem_wr_ready,
  input  logic                  mem_rd_ready,
  input  logic                  mem_rd_valid,
  input  logic [DDR_DATA_W-1:0] mem_rd_data,
  // channel link to the controller FPGA
  output link_word_t            link,
  output logic                  link_valid,
  input  logic                  link_ready,
  // status
  output logic                  busy,
  output logic                  overflow,
  output logic [ADDR_W:0]       stored
);

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  typedef enum logic [2:0] {S_ACQ, S_DRAIN, S_HDR0, S_HDR1, S_READ} state_t;

  state_t          state;
  logic [ADDR_W:0] wr_count;   // words stored
  logic [ADDR_W:0] rd_issued;  // reads accepted by the memory
  logic [ADDR_W:0] rd_sent;    // data words sent on the link
  logic [CW-1:0]   in_flight;  // reads accepted, data not yet returned

  // write FIFO
  logic    wf_push, wf_pop, wf_empty, wf_full;
  sample_t wf_data;
  logic [CW-1:0] wf_count;
  // read FIFO
  logic    rf_pop, rf_empty, rf_full;
  logic [DDR_DATA_W-1:0] rf_data;
  logic [CW-1:0] rf_count;

  logic mem_full, do_write, do_read, accept_in;
  logic [31:0] count32;

  always_comb begin
    mem_full  = (wr_count == (ADDR_W+1)'(1) << ADDR_W);
    accept_in = (state == S_ACQ) && !wf_full;
    wf_push   = in_valid && accept_in;
    do_write  = (state == S_ACQ || state == S_DRAIN) && !wf_empty && !mem_full && mem_wr_ready;
    wf_pop    = do_write || ((state == S_ACQ || state == S_DRAIN) && !wf_empty && mem_full);
    do_read   = (state == S_READ) && (rd_issued != wr_count) && mem_rd_ready
                && ((CW+1)'(in_flight) + (CW+1)'(rf_count) < (CW+1)'(FIFO_DEPTH));

    mem_req       = '0;
    mem_req.wr    = do_write;
    mem_req.rd    = do_read;
    mem_req.addr  = do_write ? DDR_ADDR_W'(wr_count) : DDR_ADDR_W'(rd_issued);
    mem_req.wdata = DDR_DATA_W'(wf_data);

    count32 = 32'(wr_count);
    link    = '0;
    link_valid = 1'b0;
    rf_pop  = 1'b0;
    unique case (state)
      S_HDR0: begin
        link_valid = 1'b1;
        link.first = 1'b1;
        link.data  = {overflow, 4'b0, count32[26:16]};
      end
      S_HDR1: begin
        link_valid = 1'b1;
        link.last  = (wr_count == 0);
        link.data  = count32[15:0];
      end
      S_READ: begin
        link_valid = !rf_empty;
        link.last  = (rd_sent == wr_count - 1'b1);
        link.data  = rf_data;
        rf_pop     = link_ready && !rf_empty;
      end
      default: ;
    endcase
    busy   = (state != S_ACQ);
    stored = wr_count;
  end

  sync_fifo #(.WIDTH(SAMPLE_W), .DEPTH(FIFO_DEPTH)) u_wfifo (
    .clk, .rst_n, .wr(wf_push), .wdata(in_data), .rd(wf_pop), .rdata(wf_data),
    .empty(wf_empty), .full(wf_full), .count(wf_count)
  );

  sync_fifo #(.WIDTH(DDR_DATA_W), .DEPTH(FIFO_DEPTH)) u_rfifo (
    .clk, .rst_n, .wr(mem_rd_valid), .wdata(mem_rd_data), .rd(rf_pop), .rdata(rf_data),
    .empty(rf_empty), .full(rf_full), .count(rf_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_ACQ;
      wr_count  <= '0;
      rd_issued <= '0;
      rd_sent   <= '0;
      in_flight <= '0;
      overflow  <= 1'b0;
    end else begin
      if (in_valid && !(accept_in && !mem_full)) overflow <= 1'b1;
      if (do_write) wr_count <= wr_count + 1'b1;
      in_flight <= in_flight + CW'(do_read) - CW'(mem_rd_valid);
      if (do_read) rd_issued <= rd_issued + 1'b1;
      unique case (state)
        S_ACQ: begin
          if (clear) begin
            wr_count <= '0;
            overflow <= 1'b0;
          end else if (ro_start) begin
            state <= S_DRAIN;
          end
        end
        S_DRAIN: if (wf_empty) state <= S_HDR0;
        S_HDR0:  if (link_ready) state <= S_HDR1;
        S_HDR1:  if (link_ready) begin
          rd_issued <= '0;
          rd_sent   <= '0;
          if (wr_count == 0) begin
            overflow <= 1'b0;
            state    <= S_ACQ;
          end else begin
            state <= S_READ;
          end
        end
        S_READ: if (rf_pop) begin
          rd_sent <= rd_sent + 1'b1;
          if (rd_sent == wr_count - 1'b1) begin
            wr_count <= '0;
            overflow <= 1'b0;
            state    <= S_ACQ;
          end
        end
        default: state <= S_ACQ;
      endcase
    end
  end

  // Read data only return for reads that were issued, and never overfill.
  a_rd_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_valid |-> (in_flight != 0) && !rf_full);
  a_link_hold: assert property (@(posedge clk) disable iff (!rst_n)
    link_valid && !link_ready |=> link_valid && $stable(link));

endmodule
