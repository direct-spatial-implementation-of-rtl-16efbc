// rc_ctrl: sequencer of the wrapper that streams vectors through the
// bit-serial multiplier.
//
// A command (start, src, dst, count) multiplies `count` input vectors stored
// at consecutive memory words from `src` and stores the results at
// consecutive words from `dst`. Vectors are streamed back to back: each
// occupies the input stream for OUT_W cycles (its bits, then its sign
// extension), and the next one is loaded in the cycle after the last bit,
// so a batch of n vectors takes n*OUT_W cycles plus the pipeline fill, as
// in the paper's batching experiments.
//
// Timing, counted from the clock edge that loads the input registers
// (cycle 0 shows bit 0, with `first` high):
//   * read of the next vector issued in stream cycle OUT_W-2 (memory data
//     returns one cycle later and is loaded at the end of cycle OUT_W-1);
//   * `shift` of the result registers in cycles LAT .. LAT+OUT_W-1, where
//     LAT is the multiplier's pipeline depth;
//   * result write in cycle LAT+OUT_W-1, together with its last bit.
// `done` pulses in the cycle after the last write; `busy` covers the whole
// command. The handshake (a start pulse while idle) is this design's own.
module rc_ctrl #(
  parameter int unsigned OUT_W = 26,
  parameter int unsigned LAT   = 12,
  parameter int unsigned AW    = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [AW:0]   count,
  output logic          busy,
  output logic          done,
  // memory read port and input shift registers
  output logic          re,
  output logic [AW-1:0] raddr,
  output logic          load,
  // multiplier and result shift registers
  output logic          first,
  output logic          shift,
  output logic          we,
  output logic [AW-1:0] waddr
);

  localparam int unsigned BW = $clog2(OUT_W);

  logic [AW:0]     n_q;        // vectors in this command
  logic [AW:0]     rd_q;       // reads issued
  logic [AW:0]     wr_q;       // results written
  logic [AW-1:0]   src_q, dst_q;
  logic            pend_q;     // read data arrives this cycle
  logic            act_q;      // input stream active
  logic [BW-1:0]   bit_q;      // bit index on the input stream
  logic [LAT-1:0]  vdl_q;      // stream-valid delay line
  logic [LAT-1:0]  ldl_q;      // last-bit delay line
  logic            last;

  assign last  = act_q && (bit_q == BW'(OUT_W - 1));
  assign first = act_q && (bit_q == '0);
  assign load  = pend_q;
  assign shift = vdl_q[LAT-1];
  assign we    = ldl_q[LAT-1];
  assign waddr = dst_q + AW'(wr_q);

  always_comb begin
    re    = 1'b0;
    raddr = src_q + AW'(rd_q);
    if (!busy && start && count != '0) begin
      re    = 1'b1;
      raddr = src;
    end else if (busy && act_q && bit_q == BW'(OUT_W - 2) && rd_q < n_q) begin
      re = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      n_q    <= '0;
      rd_q   <= '0;
      wr_q   <= '0;
      src_q  <= '0;
      dst_q  <= '0;
      pend_q <= 1'b0;
      act_q  <= 1'b0;
      bit_q  <= '0;
      vdl_q  <= '0;
      ldl_q  <= '0;
    end else begin
      done   <= 1'b0;
      pend_q <= re;
      vdl_q  <= {vdl_q[LAT-2:0], act_q};
      ldl_q  <= {ldl_q[LAT-2:0], last};
      if (!busy && start && count != '0) begin
        busy  <= 1'b1;
        n_q   <= count;
        src_q <= src;
        dst_q <= dst;
        rd_q  <= 1;
        wr_q  <= '0;
      end else if (re) begin
        rd_q <= rd_q + 1'b1;
      end
      if (load) begin
        act_q <= 1'b1;
        bit_q <= '0;
      end else if (last) begin
        act_q <= 1'b0;
        bit_q <= '0;
      end else if (act_q) begin
        bit_q <= bit_q + 1'b1;
      end
      if (we) begin
        wr_q <= wr_q + 1'b1;
        if (wr_q + 1'b1 == n_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

`ifndef SYNTHESIS
  // The stream timing needs at least two bits per vector and a pipeline
  // of at least two stages.
  initial assert (OUT_W >= 2 && LAT >= 2)
    else $error("rc_ctrl: OUT_W and LAT must be at least 2");
  // A new vector is only loaded when the stream is idle or ends this cycle.
  assert property (@(posedge clk) disable iff (!rst_n) load |-> (!act_q || last));
`endif

endmodule
