// input_buffer -- crossbar input buffer with column-sliced window mapping.
//
// A convolution window of K x K over Cin input channels is cut into its K
// columns.  One "slot" of slot_bits = K*Cin bits holds the same window
// column of every channel (bit c*K + r of a slot = channel c, kernel row r),
// and slot s sits at buffer bits [s*slot_bits +: slot_bits].  The kernels
// are programmed into the crossbar in the same order, so when the window
// moves one step to the right the oldest slot is shifted out, every slot
// moves down by one, and only the new right-hand column is streamed in; the
// kernels never have to be re-mapped.  With nslots = K+1 the extra top slot
// holds the column the next window needs, so two windows can be evaluated
// in one crossbar read.  At the end of an image row the buffer is refreshed:
// clear, then refill.  A fully connected layer simply loads its vector with
// word writes.
//
// Interface (one operation per cycle, caller guarantees no overlap):
//   clear                          empty buffer and staging register
//   wr_en / wr_addr / wr_data      write 32-bit word wr_addr (bits
//                                  [wr_addr*BUS_W +: BUS_W])
//   col_en / col_data / col_last   one beat of a new column, least
//                                  significant beat first; ceil(slot_bits /
//                                  BUS_W) beats; the shift happens with the
//                                  last beat and `shifted` pulses the cycle
//                                  after
// vec is the registered buffer content seen by the wordline driver.
//
// The shift-and-stream scheme, the extra column and the 32-bit bus follow
// the paper; the bit layout inside a slot and the beat protocol are this
// design's choices (the paper's drawing of the layout is not available).
module input_buffer #(
  parameter int unsigned N_IN  = 512,
  parameter int unsigned BUS_W = 32,
  localparam int unsigned NW   = (N_IN + BUS_W - 1) / BUS_W,
  localparam int unsigned AW   = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned SB_W = $clog2(N_IN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SB_W-1:0]  slot_bits,
  input  logic [SB_W-1:0]  nslots,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [BUS_W-1:0] wr_data,
  input  logic             col_en,
  input  logic [BUS_W-1:0] col_data,
  input  logic             col_last,
  output logic [N_IN-1:0]  vec,
  output logic             shifted
);
  localparam int unsigned PW = NW * BUS_W;  // padded width

  logic [PW-1:0] buf_q, stage_q, stage_full;
  logic [AW-1:0] beat_q;
  logic [PW-1:0] slot_mask, keep_mask, shifted_vec;
  int unsigned   top_off;

  always_comb begin
    stage_full = stage_q;
    stage_full[32'(beat_q)*BUS_W +: BUS_W] = col_data;
    top_off   = (32'(nslots) > 0) ? (32'(nslots) - 1) * 32'(slot_bits) : 0;
    slot_mask = ~({PW{1'b1}} << slot_bits);
    keep_mask = ~({PW{1'b1}} << top_off);
    shifted_vec = ((buf_q >> slot_bits) & keep_mask)
                | ((stage_full & slot_mask) << top_off);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q   <= '0;
      stage_q <= '0;
      beat_q  <= '0;
      shifted <= 1'b0;
    end else begin
      shifted <= 1'b0;
      if (clear) begin
        buf_q   <= '0;
        stage_q <= '0;
        beat_q  <= '0;
      end else if (wr_en) begin
        buf_q[32'(wr_addr)*BUS_W +: BUS_W] <= wr_data;
      end else if (col_en) begin
        if (col_last) begin
          buf_q   <= shifted_vec;
          stage_q <= '0;
          beat_q  <= '0;
          shifted <= 1'b1;
        end else begin
          stage_q <= stage_full;
          beat_q  <= beat_q + 1'b1;
        end
      end
    end
  end

  assign vec = buf_q[N_IN-1:0];

  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({clear, wr_en, col_en}));
endmodule
