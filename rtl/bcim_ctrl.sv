// bcim_ctrl -- sequencer of one crossbar evaluation.
//
// An evaluation is READ, then COMPARE, then CASCADE:
//   READ     1 cycle: rd_en applies the input buffer to the wordlines and
//            the crossbars sample their bitlines;
//   COMPARE  nref cycles: the sense amplifiers compare against one
//            reference per cycle (cmp_en, sel from sa_ref_seq);
//   CASCADE  1 cycle: casc_en, the cascaded activations are handed to the
//            bus packer.
// So the latency from an accepted start to casc_en is nref + 2 cycles (3
// with one reference, 5 with three).  start is accepted only when idle and
// the bus packer is free (start_ready); busy is high from the accepted start
// through CASCADE and holds the input bus off so the buffer cannot change
// under a read.
//
// That three references cost three compare cycles follows the paper; the
// rest of the sequence is this design's choice.
module bcim_ctrl #(
  parameter int unsigned NREF = 3,
  localparam int unsigned SEL_W = (NREF > 1) ? $clog2(NREF) : 1,
  localparam int unsigned NR_W  = $clog2(NREF + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NR_W-1:0]  nref,
  input  logic             pk_busy,
  output logic             start_ready,
  output logic             busy,
  output logic             rd_en,
  output logic             cmp_en,
  output logic [SEL_W-1:0] sel,
  output logic             casc_en
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_CMP, S_CASC} state_e;
  state_e state_q;
  logic   seq_done;

  sa_ref_seq #(.NREF(NREF)) u_seq (
    .clk, .rst_n,
    .start (state_q == S_READ),
    .nref,
    .cmp_en,
    .sel,
    .done  (seq_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= S_IDLE;
    else begin
      unique case (state_q)
        S_IDLE:  if (start && !pk_busy) state_q <= S_READ;
        S_READ:  state_q <= S_CMP;
        S_CMP:   if (seq_done) state_q <= S_CASC;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign start_ready = (state_q == S_IDLE) && !pk_busy;
  assign busy        = (state_q != S_IDLE);
  assign rd_en       = (state_q == S_READ);
  assign casc_en     = (state_q == S_CASC);
endmodule
