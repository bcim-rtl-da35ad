// act_packer -- sends an activation vector over the 32-bit bus.
//
// On load (accepted only when not busy) it captures the activation bits of
// one evaluation and then presents them as ceil(nbits/BUS_W) bus words,
// bit 0 of the vector in bit 0 of the first word; bits at or above nbits
// are sent as 0.  A word moves when out_valid and out_ready are both high;
// out_last marks the final word.  A receiver holding out_ready low stalls
// the packer, and through busy the engine behind it.
//
// The 32-bit width follows the paper; the valid/ready handshake and the
// packing order are this design's choices.
module act_packer #(
  parameter int unsigned COLS  = 512,
  parameter int unsigned BUS_W = 32,
  localparam int unsigned NW   = (COLS + BUS_W - 1) / BUS_W,
  localparam int unsigned NB_W = $clog2(COLS + 1),
  localparam int unsigned WI_W = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [COLS-1:0]  act,
  input  logic [NB_W-1:0]  nbits,
  output logic             busy,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [BUS_W-1:0] out_data,
  output logic             out_last
);
  localparam int unsigned PW = NW * BUS_W;

  logic [PW-1:0]   data_q;
  logic [WI_W-1:0] idx_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      data_q <= '0;
      idx_q  <= '0;
      last_q <= '0;
    end else if (!busy) begin
      if (load && nbits != 0) begin
        busy   <= 1'b1;
        data_q <= PW'(act) & ~({PW{1'b1}} << nbits);
        idx_q  <= '0;
        last_q <= WI_W'((32'(nbits) + BUS_W - 1) / BUS_W - 1);
      end
    end else if (out_ready) begin
      if (idx_q == last_q) busy <= 1'b0;
      else                 idx_q <= idx_q + 1'b1;
    end
  end

  assign out_valid = busy;
  assign out_data  = data_q[32'(idx_q)*BUS_W +: BUS_W];
  assign out_last  = busy && (idx_q == last_q);

  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));
endmodule
