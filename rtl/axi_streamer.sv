// axi_streamer: AXI Streamer, the interface controller between the DMA and
// the crypto engine of one lane.
//
// The DMA's memory-to-stream channel feeds the slave stream, the engine's
// output leaves on the master stream towards the DMA's stream-to-memory
// channel. A job starts with a crypto_start pulse from the process
// synchronizer: the streamer passes it to the engine (ce_start), opens the
// slave stream, and then moves words both ways through two small FIFOs. The
// job ends when the master stream hands over the beat marked tlast; the
// streamer then pulses crypto_done to the process synchronizer and closes the
// slave stream and the engine's output until the next start. Beats offered on the slave stream while
// no job runs wait (tready low). words_in / words_out count the beats of the
// current job.
//
// Following the paper: slave stream, master stream, a control and a data
// connection to the crypto engine, control signals to the process
// synchronizer. Own choices: the engine port is a valid/ready stream in each
// direction with tlast, the engine marks its final output word with tlast
// (the word count of the output may differ from the input, e.g. when a
// digest is appended), FIFO depth FIFO_DEPTH.
module axi_streamer
  import nsp_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  // process synchronizer
  input  logic  crypto_start,
  output logic  crypto_done,
  output logic  crypto_busy,
  // slave stream from the DMA (MM2S)
  input  axis_t s_axis,
  output logic  s_axis_tready,
  // master stream to the DMA (S2MM)
  output axis_t m_axis,
  input  logic  m_axis_tready,
  // crypto engine
  output logic  ce_start,
  output axis_t ce_din,
  input  logic  ce_din_ready,
  input  axis_t ce_dout,
  output logic  ce_dout_ready,
  // status
  output word_t words_in,
  output word_t words_out
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic  running;
  axis_t s_gated;
  logic  in_fifo_ready;
  axis_t ce_gated;
  logic  out_fifo_ready;
  logic [PW:0] in_count, out_count;

  always_comb begin
    s_gated        = s_axis;
    s_gated.tvalid = s_axis.tvalid && running;
  end
  assign s_axis_tready = in_fifo_ready && running;

  always_comb begin
    ce_gated        = ce_dout;
    ce_gated.tvalid = ce_dout.tvalid && running;
  end
  assign ce_dout_ready = out_fifo_ready && running;

  stream_fifo #(.DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .in(s_gated), .in_ready(in_fifo_ready),
    .out(ce_din), .out_ready(ce_din_ready), .count(in_count)
  );

  stream_fifo #(.DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .in(ce_gated), .in_ready(out_fifo_ready),
    .out(m_axis), .out_ready(m_axis_tready), .count(out_count)
  );

  wire last_out = m_axis.tvalid && m_axis_tready && m_axis.tlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      ce_start    <= 1'b0;
      crypto_done <= 1'b0;
      words_in    <= '0;
      words_out   <= '0;
    end else begin
      ce_start    <= 1'b0;
      crypto_done <= 1'b0;
      if (crypto_start && !running) begin
        running   <= 1'b1;
        ce_start  <= 1'b1;
        words_in  <= '0;
        words_out <= '0;
      end else if (running) begin
        if (s_axis.tvalid && s_axis_tready) words_in <= words_in + 1'b1;
        if (m_axis.tvalid && m_axis_tready) words_out <= words_out + 1'b1;
        if (last_out) begin
          running     <= 1'b0;
          crypto_done <= 1'b1;
        end
      end
    end
  end

  assign crypto_busy = running;

  logic unused;
  assign unused = ^{in_count, out_count};

  a_out_only_in_job: assert property (@(posedge clk) disable iff (!rst_n)
                       m_axis.tvalid && m_axis_tready |-> running);

endmodule
