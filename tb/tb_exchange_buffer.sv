// tb_exchange_buffer: NC = 8. Loads a frame and checks the hard-decision
// initialisation, the row views (G_pi) and column views (G) of LLRs and hard
// outputs, transposed commits, the x1 -> x2 shift, the flag vector and the
// read port, against a software copy of the matrix.
module tb_exchange_buffer;
  import gn_pkg::*;
  localparam int NC = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic in_we = 0, commit = 0;
  logic [2:0] in_row = 0, rd_row = 0;
  llr_t in_llr [NC];
  graph_e graph = GRAPH_PI;
  logic [NC-1:0] ho_in [NC];
  logic [NC-1:0] e_in;
  llr_t dec_lch [NC][NC];
  logic [NC-1:0] dec_x1 [NC], dec_x2 [NC];
  logic [NC-1:0] dec_e, rd_data;

  exchange_buffer #(.NC(NC)) dut (.clk, .in_we, .in_row, .in_llr, .graph, .commit,
    .ho_in, .e_in, .dec_lch, .dec_x1, .dec_x2, .dec_e, .rd_row, .rd_data);

  int  m_lch [NC][NC];
  bit  m_x1 [NC][NC], m_x2 [NC][NC];
  bit [NC-1:0] m_e;

  task automatic check_views();
    for (int g = 0; g < 2; g++) begin
      graph = g ? GRAPH_PI : GRAPH_G;
      #1;
      for (int i = 0; i < NC; i++)
        for (int j = 0; j < NC; j++) begin
          int r, c;
          r = g ? i : j; c = g ? j : i;
          checks++;
          if (int'(dec_lch[i][j]) != m_lch[r][c] || dec_x1[i][j] != m_x1[r][c] ||
              dec_x2[i][j] != m_x2[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL view g=%0d i=%0d j=%0d", g, i, j);
          end
        end
      checks++;
      if (dec_e !== m_e) begin failures++; $display("FAIL e"); end
    end
    for (int r = 0; r < NC; r++) begin
      rd_row = 3'(r); #1;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (rd_data[c] != m_x1[r][c]) begin failures++; $display("FAIL rd r=%0d", r); end
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 3; f++) begin
      for (int r = 0; r < NC; r++) begin
        @(negedge clk);
        in_we = 1; in_row = 3'(r);
        for (int c = 0; c < NC; c++) begin
          m_lch[r][c] = int'($urandom % 63) - 31;
          in_llr[c] = llr_t'(m_lch[r][c]);
          m_x1[r][c] = m_lch[r][c] < 0;
          m_x2[r][c] = m_lch[r][c] < 0;
        end
      end
      @(negedge clk); in_we = 0; m_e = '0;
      check_views();
      for (int it = 0; it < 4; it++) begin
        bit pi;
        pi = (it % 2 == 0);
        @(negedge clk);
        graph = pi ? GRAPH_PI : GRAPH_G;
        commit = 1;
        e_in = NC'($urandom);
        for (int i = 0; i < NC; i++) ho_in[i] = NC'($urandom);
        @(negedge clk);
        commit = 0;
        m_x2 = m_x1;
        m_e = e_in;
        for (int i = 0; i < NC; i++)
          for (int j = 0; j < NC; j++)
            if (pi) m_x1[i][j] = ho_in[i][j]; else m_x1[j][i] = ho_in[i][j];
        check_views();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
