// circ_buffer: circular waveform buffer for one DAC channel.
//
// While armed the buffer writes every in_valid sample into a ring of DEPTH
// words.  A trigger starts a post-trigger count; after cfg_post more samples
// the buffer freezes, keeping DEPTH-cfg_post samples of history before the
// trigger.  arm restarts recording (and clears frozen).  Read-back is
// relative to the oldest sample: rd_addr 0 is the sample written right after
// the last one, so addresses 0..DEPTH-1 read the ring in time order;
// rd_data appears one cycle after rd_addr.  filled is high once the ring has
// wrapped at least once since arming (before that, low addresses are stale).
//
// Only the buffer's name and its place after the DAC channelizer are given by
// the reference architecture; the arm/trigger/post-count protocol is this
// design's choice.
module circ_buffer #(
  parameter int DEPTH = 65536,
  parameter int W     = 36,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          arm,
  input  logic          trig,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  input  logic [AW:0]   cfg_post,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  output logic          frozen,
  output logic          triggered,
  output logic          filled
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr;
  logic [AW:0]   post_cnt;
  logic [AW:0]   post;
  logic          running;

  always_comb begin
    post = (cfg_post > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : cfg_post;
  end

  always_ff @(posedge clk) begin
    if (rst || arm) begin
      wptr      <= '0;
      post_cnt  <= '0;
      running   <= 1'b1;
      triggered <= 1'b0;
      frozen    <= 1'b0;
      filled    <= 1'b0;
    end else if (running) begin
      if (trig && !triggered) begin
        triggered <= 1'b1;
        if (post == 0) begin
          running <= 1'b0;
          frozen  <= 1'b1;
        end
      end
      if (in_valid && !(trig && !triggered && post == 0)) begin
        wptr <= wptr + 1'b1;
        if (wptr == AW'(DEPTH-1)) filled <= 1'b1;
        if (triggered || trig) begin
          post_cnt <= post_cnt + 1'b1;
          if (post_cnt + 1'b1 >= post) begin
            running <= 1'b0;
            frozen  <= 1'b1;
          end
        end
      end
    end
  end

  logic wr;
  assign wr = running && !rst && !arm && in_valid && !(trig && !triggered && post == 0);

  always_ff @(posedge clk) begin
    if (wr) mem[wptr] <= in_data;
    rd_data <= mem[wptr + rd_addr];
  end

endmodule
