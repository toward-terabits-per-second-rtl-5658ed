// decoder_ctrl: iteration controller of the parallel decoder.
//
// It runs the paper's decoding loop: load a frame, then for t = 1, 2, ...
// decode on the stage-permuted graph G_pi when t is odd and on G when t is
// even (the loop's graph selection toggles before the first iteration), start
// all component decoders together, wait until none is busy, and commit their
// hard outputs and error flags. Decoding stops when an iteration t >= 2 finds
// no error in any component (every component of both graphs is then a
// codeword, the "successful decoding" exit of the paper's flow chart) or after
// T_MAX iterations; the decoded codeword is then streamed out.
// The number of SC decoders activated (components with E = 1) is counted per
// frame, the complexity measure the paper reports.
//
// Interface: channel LLRs arrive one row of NC per cycle on in_valid/in_ready
// (NC rows per frame); the result leaves one row of NC bits per cycle on
// out_valid/out_ready with out_last on the final row. The streaming protocol
// and the stop rule for t >= 2 are this design's choices.
module decoder_ctrl
  import gn_pkg::*;
#(
  parameter int NC    = NC_DEFAULT,
  parameter int T_MAX = T_MAX_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input stream
  input  logic                  in_valid,
  output logic                  in_ready,
  // output stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic                  out_last,
  // buffer control
  output logic                  buf_in_we,
  output logic [$clog2(NC)-1:0] buf_row,
  output graph_e                graph,
  output logic                  commit,
  // component decoders
  output logic                  dec_start,
  input  logic                  dec_busy_any,
  input  logic [NC-1:0]         dec_e,
  // status
  output logic [ITER_W-1:0]     iter,
  output logic [15:0]           sc_activations,
  output logic [ITER_W-1:0]     frame_iters,
  output logic                  frame_early_stop
);
  localparam int RW = $clog2(NC);

  typedef enum logic [2:0] {S_LOAD, S_START, S_WAIT, S_COMMIT, S_OUT} state_e;
  state_e        state;
  logic [RW-1:0] row;

  function automatic logic [15:0] popcount(input logic [NC-1:0] v);
    logic [15:0] n;
    n = '0;
    for (int k = 0; k < NC; k++) n = n + 16'(v[k]);
    return n;
  endfunction

  assign in_ready  = (state == S_LOAD);
  assign buf_in_we = (state == S_LOAD) && in_valid;
  assign out_valid = (state == S_OUT);
  assign out_last  = (state == S_OUT) && (int'(row) == NC - 1);
  assign buf_row   = row;
  assign dec_start = (state == S_START);
  assign commit    = (state == S_COMMIT);
  assign graph     = iter[0] ? GRAPH_PI : GRAPH_G;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= S_LOAD;
      row              <= '0;
      iter             <= '0;
      sc_activations   <= '0;
      frame_iters      <= '0;
      frame_early_stop <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          row <= row + 1'b1;
          if (int'(row) == NC - 1) begin
            state          <= S_START;
            iter           <= ITER_W'(1);
            sc_activations <= '0;
          end
        end
        S_START: state <= S_WAIT;
        S_WAIT:  if (!dec_busy_any) state <= S_COMMIT;
        S_COMMIT: begin
          sc_activations <= sc_activations + popcount(dec_e);
          if ((int'(iter) >= 2 && dec_e == '0) || int'(iter) == T_MAX) begin
            state            <= S_OUT;
            row              <= '0;
            frame_iters      <= iter;
            frame_early_stop <= (dec_e == '0);
          end else begin
            iter  <= iter + 1'b1;
            state <= S_START;
          end
        end
        S_OUT: if (out_ready) begin
          row <= row + 1'b1;
          if (int'(row) == NC - 1) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Handshake rules: input and output phases never overlap, a start lasts
  // one cycle, and a commit only follows a finished iteration.
  a_phases: assert property (@(posedge clk) disable iff (!rst_n) !(in_ready && out_valid));
  a_start:  assert property (@(posedge clk) disable iff (!rst_n) dec_start |=> !dec_start);
  a_commit: assert property (@(posedge clk) disable iff (!rst_n) commit |-> !dec_busy_any);

  initial assert (T_MAX >= 1 && T_MAX <= T_TABLE)
    else $error("decoder_ctrl: T_MAX must be within the damping-factor table");
  initial assert (T_MAX < 2 ** ITER_W)
    else $error("decoder_ctrl: ITER_W too small for T_MAX");
endmodule
