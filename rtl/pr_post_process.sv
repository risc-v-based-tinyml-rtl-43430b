// pr_post_process: the Projection Post Process ("Result Quantize & Read").
//
// When the projection unit finishes a pixel, its ENGINES accumulators are
// copied into a hold register (in_valid && in_ready). From there one
// requantizer lane works through the cout output channels, one per cycle,
// reading each channel's bias, multiplier and shift from the projection bias
// buffer (synchronous, one cycle) and writing the 8-bit result into the output
// register. Once all cout channels are done the output pixel is offered to the
// CPU as ceil(cout/4) 32-bit words (channel 4k+i in byte i of word k); each
// rd_pop takes one word, and the last pop frees the output register. No ReLU
// is applied (linear bottleneck): the clamp is act_min/act_max.
//
// Two registers (hold, output) let the projection unit start the next pixel
// while the previous one is quantized and read. in_ready low means the hold
// register is still occupied; the pipeline must then stall. Bias addition and
// requantization at this point are the paper's; the single shared lane and
// the two-register arrangement are this design's choices.
//
// Timing: a captured pixel is readable cout+2 cycles later at the earliest.
module pr_post_process
  import dsc_pkg::*;
#(
  parameter int unsigned ENGINES = PR_ENGINES
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [6:0]          cout,
  input  int8_t               zp,
  input  int8_t               act_min,
  input  int8_t               act_max,
  // from the projection unit
  input  logic                in_valid,
  output logic                in_ready,
  input  acc_t [ENGINES-1:0]  acc,
  // to the projection bias buffer
  output logic                prm_rd_en,
  output logic [5:0]          prm_addr,
  input  qparam_t             prm_data,
  // read side
  output logic                rd_valid,
  output logic [31:0]         rd_data,
  input  logic                rd_pop,
  output logic                idle
);
  localparam int unsigned WORDS = (ENGINES + 3) / 4;

  acc_t  [ENGINES-1:0]   hold;
  logic                  hold_full;
  int8_t [4*WORDS-1:0]   obuf;
  logic                  obuf_full;
  logic [6:0]            qidx;      // channel whose params are being read
  logic                  qbusy;
  logic                  q_v;       // params valid for channel q_ch
  logic [6:0]            q_ch;
  logic [4:0]            rd_ptr;
  logic [6:0]            nwords;

  assign in_ready  = !hold_full;
  assign nwords    = (cout + 7'd3) >> 2;
  assign prm_rd_en = qbusy;
  assign prm_addr  = 6'(qidx);
  assign rd_valid  = obuf_full;
  assign rd_data   = obuf[4*rd_ptr +: 4];
  assign idle      = !hold_full && !obuf_full;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold_full <= 1'b0;
      obuf_full <= 1'b0;
      qbusy     <= 1'b0;
      q_v       <= 1'b0;
      qidx      <= '0;
      q_ch      <= '0;
      rd_ptr    <= '0;
      obuf      <= '0;
    end else begin
      // capture a finished pixel
      if (in_valid && !hold_full) begin
        hold      <= acc;
        hold_full <= 1'b1;
      end
      // start quantizing once the output register is free
      if (hold_full && !obuf_full && !qbusy && !q_v) begin
        qbusy <= 1'b1;
        qidx  <= '0;
      end
      // parameter read for channel qidx, result one cycle later
      q_v  <= qbusy;
      q_ch <= qidx;
      if (qbusy) begin
        if (qidx == cout - 7'd1) qbusy <= 1'b0;
        else qidx <= qidx + 7'd1;
      end
      if (q_v) begin
        obuf[q_ch] <= requant(hold[q_ch], prm_data, zp, act_min, act_max);
        if (q_ch == cout - 7'd1) begin
          obuf_full <= 1'b1;
          hold_full <= 1'b0;
          rd_ptr    <= '0;
        end
      end
      // CPU reads
      if (rd_pop && obuf_full) begin
        if (7'(rd_ptr) == nwords - 7'd1) begin
          obuf_full <= 1'b0;
          obuf      <= '0;
        end else rd_ptr <= rd_ptr + 5'd1;
      end
    end
  end
endmodule
