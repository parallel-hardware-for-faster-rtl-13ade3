// control_unit -- schedules the five register arrays of the datapath.
//
// The datapath has five register arrays, one after each processing step, and ld[k]
// loads array k+1: the input characters (ld[0]), the prefix/suffix flags (ld[1]), the
// produced prefix/suffix runs (ld[2]), the candidate stems (ld[3]) and the roots
// (ld[4]).  Two schemes, chosen by PIPELINED, as in the paper:
//
//  * Non-pipelined (PIPELINED = 0): a five-state machine S1..S5 that raises one load
//    per state, in the order above.  S1 waits for in_valid (in_ready is high only
//    there), so a word takes five cycles and the next one can enter right after.
//  * Pipelined (PIPELINED = 1): all five arrays load every cycle and a valid bit
//    travels along with each word, so a new word enters every cycle.
//
// In pipelined mode in_ready and ld are constant high; they are kept as ports so that
// both schemes drive the datapath through the same interface.
//
// In both, out_valid rises for one cycle five clock edges after the word was taken,
// together with the root registers.  The five states, their order and the loads they
// make are the paper's (its FSM figure); the in_valid/in_ready/out_valid handshake,
// waiting in S1 and the synchronous active-high reset are this design's choices.
module control_unit #(
  parameter bit PIPELINED = 1'b1
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  output logic       in_ready,
  output logic [4:0] ld,
  output logic       out_valid
);

  typedef enum logic [2:0] {
    S1_LOAD_CHARS = 3'd0,
    S2_CHECK      = 3'd1,
    S3_PRODUCE    = 3'd2,
    S4_STEMS      = 3'd3,
    S5_ROOTS      = 3'd4
  } state_e;

  if (PIPELINED) begin : g_pipe
    logic [4:0] vld;  // vld[k]: register array k+1 holds a valid word

    always_ff @(posedge clk) begin
      if (rst) vld <= '0;
      else     vld <= {vld[3:0], in_valid};
    end

    assign in_ready  = 1'b1;
    assign ld        = 5'b11111;
    assign out_valid = vld[4];

  end else begin : g_fsm
    state_e state, state_n;
    logic   done;

    always_comb begin
      state_n = state;
      ld      = '0;
      unique case (state)
        S1_LOAD_CHARS: if (in_valid) begin ld[0] = 1'b1; state_n = S2_CHECK; end
        S2_CHECK:      begin ld[1] = 1'b1; state_n = S3_PRODUCE;    end
        S3_PRODUCE:    begin ld[2] = 1'b1; state_n = S4_STEMS;      end
        S4_STEMS:      begin ld[3] = 1'b1; state_n = S5_ROOTS;      end
        S5_ROOTS:      begin ld[4] = 1'b1; state_n = S1_LOAD_CHARS; end
        default:       state_n = S1_LOAD_CHARS;
      endcase
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        state <= S1_LOAD_CHARS;
        done  <= 1'b0;
      end else begin
        state <= state_n;
        done  <= (state == S5_ROOTS);
      end
    end

    assign in_ready  = (state == S1_LOAD_CHARS);
    assign out_valid = done;

    // Only one register array loads in any cycle.
    a_one_load: assert property (@(posedge clk) disable iff (rst) $onehot0(ld));
  end

endmodule
