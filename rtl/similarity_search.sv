// similarity_search: sparse similarity of the frame HV with every class HV.
//
// The similarity of two sparse HVs is the number of positions where both are
// 1: a D-wide AND followed by an adder tree (popcount_tree). One tree is
// shared by all classes, which are visited one per clock cycle through the AM
// read port (am_raddr / am_rdata). A running maximum keeps the best class; on
// a tie the lower class index wins (this design's choice).
//
// The AND/adder-tree score and the class-by-class search follow the
// published design; the running maximum and the tie rule are choices made here.
//
// Timing: start is taken in IDLE; the next NUM_CLASSES cycles each score one
// class; one cycle after the last class, done pulses with pred (best class)
// and scores[] valid. done therefore rises NUM_CLASSES+1 cycles after the
// cycle in which start was high (3 cycles for two classes). query must stay
// stable while busy; the temporal encoder holds its output for a whole frame,
// which is far longer. A start while busy is ignored (and flagged by an
// assertion). pred, scores and best_score are final when done pulses and hold
// until the next search starts.
module similarity_search
#(
  parameter int unsigned D           = hdc_pkg::D,
  parameter int unsigned NUM_CLASSES = hdc_pkg::NUM_CLASSES,
  parameter int unsigned CLS_W       = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  parameter int unsigned SCORE_W     = $clog2(D + 1)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic [D-1:0]                         query,
  output logic [CLS_W-1:0]                     am_raddr,
  input  logic [D-1:0]                         am_rdata,
  output logic                                 busy,
  output logic                                 done,
  output logic [CLS_W-1:0]                     pred,
  output logic [SCORE_W-1:0]                   best_score,
  output logic [NUM_CLASSES-1:0][SCORE_W-1:0]  scores
);

  typedef enum logic [0:0] {IDLE, RUN} state_e;
  state_e             state;
  logic [CLS_W-1:0]   cls;
  logic [SCORE_W-1:0] score;
  logic               is_last;

  popcount_tree #(.N(D), .OUT_W(SCORE_W)) u_tree (.in(query & am_rdata), .count(score));

  assign am_raddr = cls;
  assign busy     = (state == RUN);
  assign is_last  = (cls == CLS_W'(NUM_CLASSES - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= IDLE;
      cls        <= '0;
      done       <= 1'b0;
      pred       <= '0;
      best_score <= '0;
      scores     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= RUN;
          cls   <= '0;
        end
        RUN: begin
          scores[cls] <= score;
          if (cls == '0 || score > best_score) begin
            best_score <= score;
            pred       <= cls;
          end
          if (is_last) begin
            state <= IDLE;
            cls   <= '0;
            done  <= 1'b1;
          end else begin
            cls <= cls + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // Handshake rules
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == IDLE)
    else $error("similarity_search: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) state == RUN |-> $stable(query))
    else $error("similarity_search: query changed during a search");

endmodule
