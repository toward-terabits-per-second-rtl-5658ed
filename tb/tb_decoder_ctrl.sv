// tb_decoder_ctrl: NC = 4, T_MAX = 8, with the component decoders modelled by
// the testbench (busy for a programmed number of cycles, programmed error
// flags). Checks the row-load and row-output handshakes, graph alternation
// (G_pi on odd iterations), one start per iteration, the stop rule (all E = 0
// at t >= 2, or T_MAX), the activation count and the per-iteration cycle count.
module tb_decoder_ctrl;
  import gn_pkg::*;
  localparam int NC = 4;
  localparam int T_MAX = 8;
  int checks = 0, failures = 0, n_early = 0, n_max = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic buf_in_we, commit, dec_start;
  logic [1:0] buf_row;
  graph_e graph;
  logic busy_any = 0;
  logic [NC-1:0] dec_e = '0;
  logic [ITER_W-1:0] iter, frame_iters;
  logic [15:0] acts;
  logic early;

  decoder_ctrl #(.NC(NC), .T_MAX(T_MAX)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .out_valid, .out_ready, .out_last,
    .buf_in_we, .buf_row, .graph, .commit, .dec_start, .dec_busy_any(busy_any),
    .dec_e, .iter, .sc_activations(acts), .frame_iters, .frame_early_stop(early));

  // E flags per iteration for the current frame, and busy length.
  logic [NC-1:0] e_plan [T_MAX+1];
  int busy_len;
  int starts;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Decoder model: on start, present the planned E and hold busy.
  always @(posedge clk) begin
    if (dec_start) begin
      starts <= starts + 1;
      dec_e <= e_plan[iter];
      busy_any <= (busy_len > 0);
      fork begin
        repeat (busy_len) @(posedge clk);
        busy_any <= 1'b0;
      end join_none
      if (graph != (iter[0] ? GRAPH_PI : GRAPH_G)) begin
        failures++; $display("FAIL graph iter=%0d", iter);
      end
      checks++;
    end
  end

  task automatic frame(input int stop_at, input bit early_exp);
    int exp_acts, t0, t1, exp_cyc;
    starts = 0;
    exp_acts = 0;
    for (int t = 1; t <= T_MAX; t++) begin
      e_plan[t] = (early_exp && t >= stop_at) ? '0 : NC'($urandom) | NC'(1);
      if (t == 1) e_plan[t] = (stop_at == 2) ? '0 : NC'($urandom) | NC'(1);
      if (t <= stop_at) exp_acts += $countones(e_plan[t]);
    end
    // load rows with gaps in in_valid
    for (int r = 0; r < NC; r++) begin
      @(negedge clk); in_valid = 0;
      @(negedge clk); in_valid = 1;
      #1;
      checks++;
      if (!in_ready || !buf_in_we || int'(buf_row) != r) begin failures++; $display("FAIL load r=%0d", r); end
    end
    @(negedge clk); in_valid = 0;
    t0 = $time;
    while (!out_valid) @(negedge clk);
    t1 = $time;
    exp_cyc = stop_at * (3 + busy_len);
    checks += 4;
    if (int'(frame_iters) != stop_at) begin failures++; $display("FAIL iters %0d exp %0d", frame_iters, stop_at); end
    if (early !== early_exp) begin failures++; $display("FAIL early flag"); end
    if (int'(acts) != exp_acts) begin failures++; $display("FAIL acts %0d exp %0d", acts, exp_acts); end
    if ((t1 - t0) / 10 != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", (t1 - t0) / 10, exp_cyc); end
    checks++;
    if (starts != stop_at) begin failures++; $display("FAIL starts %0d", starts); end
    if (early_exp) n_early++; else n_max++;
    // drain with back-pressure
    for (int r = 0; r < NC; r++) begin
      out_ready = 0; @(negedge clk);
      checks++;
      if (!out_valid || int'(buf_row) != r || out_last != (r == NC - 1)) begin failures++; $display("FAIL out r=%0d", r); end
      out_ready = 1; @(negedge clk);
    end
    out_ready = 0;
    checks++;
    if (!in_ready) begin failures++; $display("FAIL not back to load"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    busy_len = 5;  frame(3, 1);
    busy_len = 0;  frame(2, 1);
    busy_len = 7;  frame(T_MAX, 0);
    busy_len = 2;  frame(6, 1);
    checks++;
    if (n_early == 0 || n_max == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
