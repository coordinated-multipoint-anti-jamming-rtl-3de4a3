// tb_layer_ctrl: drives the sequencer with a model of the datapath that
// returns each neuron's result D = 9 cycles after its last beat is issued
// (one cycle of memory read plus an 8-cycle core). Small network: CPB = 4,
// N_IN = 10, H1 = 6, H2 = 5, T = 3, so the layers take 3, 2 and 2 beats per
// neuron. Checks the issued beat sequence (layer, neuron, beat, running weight
// row, first/last flags, activation mode), the layer barrier (no beat of a
// layer before the previous layer's last result), the cycle count
// sum(BEATS*OUT) + 3*D, the done pulse, and that a start while busy is
// ignored.
module tb_layer_ctrl;
  import cvnn_pkg::*;
  localparam int CPB = 4, N_IN = 10, H1 = 6, H2 = 5, T = 3, D = 9;
  localparam int NB [3] = '{3, 2, 2};
  localparam int NO [3] = '{H1, H2, T};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, res_valid, busy, done;
  logic [31:0] cycles;
  logic issue_valid, issue_first, issue_last;
  logic [1:0] issue_layer;
  logic [2:0] issue_neuron;
  logic [1:0] issue_beat;
  logic [5:0] issue_row;
  act_mode_e issue_mode;

  layer_ctrl #(.CPB(CPB), .N_IN(N_IN), .H1(H1), .H2(H2), .T(T),
               .ROW_W(6), .NRN_W(3), .BT_W(2)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int exp_l = 0, exp_o = 0, exp_b = 0, exp_row = 0, results = 0, n_done = 0;
  int busy_cycles = 0, barrier_waits = 0;
  logic [D-1:0] dline;

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL @%0d: %s", cycle, m);
  endtask

  // datapath model: result D cycles after a last beat
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dline <= '0;
    else        dline <= {dline[D-2:0], issue_valid && issue_last};
  end
  assign res_valid = dline[D-1];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && busy) busy_cycles++;
    if (rst_n && done) n_done++;
    if (rst_n && res_valid) results++;
    if (rst_n && busy && !issue_valid && exp_o == 0 && exp_b == 0 && exp_l > 0) barrier_waits++;
    if (rst_n && issue_valid) begin
      int prev_total;
      checks++;
      if (issue_layer != 2'(exp_l) || issue_neuron != 3'(exp_o) || issue_beat != 2'(exp_b) ||
          issue_row != 6'(exp_row) || issue_first != (exp_b == 0) ||
          issue_last != (exp_b == NB[exp_l] - 1) ||
          issue_mode != ((exp_l == 2) ? ACT_SUMABS : ACT_CRELU))
        fail($sformatf("beat l%0d o%0d b%0d row%0d, expected l%0d o%0d b%0d row%0d",
                       issue_layer, issue_neuron, issue_beat, issue_row, exp_l, exp_o, exp_b, exp_row));
      // barrier: all results of earlier layers are back
      prev_total = 0;
      for (int l = 0; l < exp_l; l++) prev_total += NO[l];
      checks++;
      if (results < prev_total) fail("layer issued before previous layer finished");
      exp_row++;
      if (exp_b == NB[exp_l] - 1) begin
        exp_b = 0;
        if (exp_o == NO[exp_l] - 1) begin exp_o = 0; exp_l++; end
        else exp_o++;
      end else exp_b++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expc;
    start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      exp_l = 0; exp_o = 0; exp_b = 0; exp_row = 0; results = 0; busy_cycles = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      repeat (5) @(negedge clk);
      start = 1;                              // ignored: busy
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      expc = 3 * 6 + 2 * 5 + 2 * 3 + 3 * D;
      checks++; if (cycles != 32'(expc)) fail($sformatf("cycles %0d expected %0d", cycles, expc));
      checks++; if (busy_cycles != expc) fail($sformatf("busy for %0d cycles", busy_cycles));
      checks++; if (exp_l != 3 || results != H1 + H2 + T) fail("incomplete inference");
      checks++; if (busy) fail("still busy");
    end
    checks++; if (n_done != 2) fail("done pulses");
    checks++; if (barrier_waits == 0) fail("no barrier wait observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
