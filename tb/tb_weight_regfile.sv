// tb_weight_regfile: writes random weights through the load port and reads
// the whole array back; writes for another layer code or outside the array
// must not change anything; reset clears the array.
// The load port is this design's own; the model has no published load
// mechanism.
module tb_weight_regfile;
  import tn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NS = 19, PI = 3, PO = 3, BW = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  wreq_t wreq;
  fx_t w [NS][PI][PO][BW][BW];
  int model [NS][PI][PO][BW][BW];

  weight_regfile #(.LAYER(2'd1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int s = 0; s < NS; s++)
      for (int i = 0; i < PI; i++)
        for (int p = 0; p < PO; p++)
          for (int l = 0; l < BW; l++)
            for (int r = 0; r < BW; r++) begin
              checks++;
              if (int'(w[s][i][p][l][r]) != model[s][i][p][l][r]) begin
                failures++;
                if (failures < 10) $display("%s: w[%0d][%0d][%0d][%0d][%0d] %0d exp %0d", what, s, i, p, l, r,
                                            w[s][i][p][l][r], model[s][i][p][l][r]);
              end
            end
  endtask

  initial begin
    wreq = '0;
    repeat (3) @(posedge clk);
    for (int s = 0; s < NS; s++) for (int i = 0; i < PI; i++) for (int p = 0; p < PO; p++)
      for (int l = 0; l < BW; l++) for (int r = 0; r < BW; r++) model[s][i][p][l][r] = 0;
    compare("reset");
    rst_n = 1;
    for (int s = 0; s < NS; s++) for (int i = 0; i < PI; i++) for (int p = 0; p < PO; p++)
      for (int l = 0; l < BW; l++) for (int r = 0; r < BW; r++) begin
        @(negedge clk);
        model[s][i][p][l][r] = rnd_fx(32767);
        wreq = '{we: 1'b1, layer: 2'd1, site: 5'(s), pi: 2'(i), po: 2'(p), l: 2'(l), r: 2'(r),
                 data: fx_t'(model[s][i][p][l][r])};
      end
    @(negedge clk) wreq.we = 1'b0;
    compare("loaded");
    // other layer, out-of-range site and index, write disabled: all ignored
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      wreq = '{we: 1'b1, layer: 2'd0, site: 5'($urandom_range(18)), pi: 2'($urandom_range(2)),
               po: 2'($urandom_range(2)), l: 2'($urandom_range(3)), r: 2'($urandom_range(3)), data: 16'h1234};
      if (n % 3 == 1) begin wreq.layer = 2'd1; wreq.site = 5'(19 + n % 13); end
      if (n % 3 == 2) begin wreq.layer = 2'd1; wreq.we = 1'b0; end
    end
    @(negedge clk) wreq.we = 1'b0;
    compare("ignored writes");
    rst_n = 0;
    @(negedge clk);
    for (int s = 0; s < NS; s++) for (int i = 0; i < PI; i++) for (int p = 0; p < PO; p++)
      for (int l = 0; l < BW; l++) for (int r = 0; r < BW; r++) model[s][i][p][l][r] = 0;
    compare("reset again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
