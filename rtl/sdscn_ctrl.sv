// sdscn_ctrl -- iteration controller of the read (retrieval) path.
//
// Sequences one retrieval so that the output registers are loaded exactly
// 2 + (BETA+1)*(IT-1) clock edges after the edge that accepts `start`
// (11 at BETA = 2, IT = 4):
//   IDLE  start seen in read mode: the links of the local-decoder indices
//         are read (it_ctrl = 0, first-iteration bypass of erased clusters),
//         and the GD accumulators are cleared.
//   IT1   the RAM words are valid: the GD registers iteration 1 with the
//         local-decoder vector as memory effect; the SPMs are cleared.
//   SER   one of IT-1 later iterations, in BETA+1 beats. Beats 0..BETA-1
//         each read the link rows of the neuron the SPMs present. Beat 0
//         clears the GD accumulators and beats 1..BETA-1 load them. Beat
//         BETA registers the iteration result and clears the SPMs.
//   OUT   the output registers take the SPM priority-encoder outputs.
// `it_ctrl` is 0 up to and including IT1 and 1 afterwards. It switches both
// the LSM address multiplexers (LD index / SPM index) and the GD memory-
// effect multiplexers (LD vector / GD output).
//
// The paper gives the access delay and It_Ctrl; the state sequence and the
// strobes are this design's own. The request inputs (sub-messages and
// erase flags) must stay stable while `busy` is high. A `start` in write
// mode, or while busy, is ignored.
module sdscn_ctrl
  import sdscn_pkg::*;
#(
  parameter int unsigned BETA = sdscn_pkg::BETA_DEF,
  parameter int unsigned IT   = sdscn_pkg::IT_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic rw,        // 1: read mode
  input  logic start,     // request a retrieval
  output logic busy,      // a retrieval is in progress
  output logic it_ctrl,   // 0: first iteration, 1: later iterations
  output logic rd_issue,  // a link read is issued this cycle
  output logic first_rd,  // the read issued is the first-iteration read
  output logic acc_clr,   // clear GD accumulators
  output logic acc_en,    // load GD accumulators
  output logic op_en,     // register GD iteration result
  output logic spm_clr,   // clear SPM registers
  output logic out_en     // load output registers
);

  localparam int unsigned BW = $clog2(BETA + 1);
  localparam int unsigned IW = $clog2(IT + 1);

  ctrl_state_e   state;
  logic [BW-1:0] beat;
  logic [IW-1:0] iter;    // iteration being computed in SER

  logic accept;
  assign accept = (state == ST_IDLE) && start && rw;

  always_comb begin
    busy     = (state != ST_IDLE);
    it_ctrl  = (state == ST_SER) || (state == ST_OUT);
    rd_issue = accept || ((state == ST_SER) && (beat < BW'(BETA)));
    first_rd = accept;
    acc_clr  = accept || ((state == ST_SER) && (beat == '0));
    acc_en   = (state == ST_SER) && (beat != '0) && (beat < BW'(BETA));
    op_en    = (state == ST_IT1) || ((state == ST_SER) && (beat == BW'(BETA)));
    spm_clr  = op_en;
    out_en   = (state == ST_OUT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      beat  <= '0;
      iter  <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (accept) state <= ST_IT1;
        ST_IT1: begin
          beat <= '0;
          iter <= IW'(2);
          state <= (IT > 1) ? ST_SER : ST_OUT;
        end
        ST_SER: begin
          if (beat == BW'(BETA)) begin
            beat <= '0;
            if (iter == IW'(IT)) state <= ST_OUT;
            else                 iter  <= iter + 1'b1;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        ST_OUT: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
