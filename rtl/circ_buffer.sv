// circ_buffer: asynchronous-mode circular sample memory of one channel.
//
// Every ADC sample is written, one per clock, into a circular RAM of DEPTH
// samples. When a trigger arrives, the block streams out the `pre` samples
// that precede the trigger followed by `post` samples starting with the sample
// of the trigger cycle, so that a window around the trigger reaches the DDR3
// buffer. The published design stores samples continuously in a circular
// memory block and keeps a preconfigured number of samples before and after
// the trigger; the depth, the count widths and the exact alignment are this
// design's choices.
//
// How it works: the read pointer is set to (write pointer - pre) on the
// trigger and then advances one per clock, so it trails the write pointer by
// exactly `pre` samples and every post-trigger sample has been written before
// it is read. The RAM has a registered read, so `out_valid`/`out_data` appear
// two cycles after the trigger cycle for the first (oldest) sample and the
// stream is gap-free for pre+post cycles. `pre` is clipped to DEPTH-1.
// Triggers while a window is being streamed are dropped and flagged on
// `trig_lost`. Samples older than the time since reset are whatever the RAM
// held; the controller is expected to wait DEPTH cycles after reset.
module circ_buffer
  import wfd_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  sample_t     adc_sample,
  input  logic        trig,
  input  logic [15:0] pre,
  input  logic [31:0] post,
  output logic        out_valid,
  output sample_t     out_data,
  output logic        busy,
  output logic        trig_lost
);

  localparam int unsigned AW = $clog2(DEPTH);

  sample_t        mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [32:0]    remaining;   // samples still to read
  logic           rd_en;
  logic [AW-1:0]  pre_clip;

  always_comb begin
    if (32'(pre) > DEPTH - 1) pre_clip = AW'(DEPTH - 1);
    else                      pre_clip = AW'(pre);
    busy      = (remaining != 0);
    rd_en     = busy;
    trig_lost = trig && busy;
  end

  // Write side: free running.
  always_ff @(posedge clk) begin
    mem[wp] <= adc_sample;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) wp <= '0;
    else        wp <= wp + 1'b1;
  end

  // Read side.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp        <= '0;
      remaining <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= rd_en;
      if (rd_en) begin
        rp        <= rp + 1'b1;
        remaining <= remaining - 1;
      end else if (trig) begin
        rp        <= wp - pre_clip;
        remaining <= 33'(pre_clip) + 33'(post);
      end
    end
  end

  always_ff @(posedge clk) begin
    out_data <= mem[rp];
  end

endmodule
