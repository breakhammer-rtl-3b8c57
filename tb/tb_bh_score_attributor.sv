// tb_bh_score_attributor -- feeds a random snapshot every cycle and checks
// every output against floor(act_i * 128 / total) (0 when total is 0),
// computed here with plain integer arithmetic, and that each result comes out
// exactly FRAC_W+1 = 8 cycles after its input.
module tb_bh_score_attributor;
  localparam int unsigned N = 4, ACT_W = 16, FRAC_W = 7;
  localparam int unsigned TOT_W = ACT_W + 3, INC_W = FRAC_W + 1, LAT = FRAC_W + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [N-1:0][ACT_W-1:0] in_act = '0;
  logic [TOT_W-1:0] in_total = '0;
  logic out_valid;
  logic [N-1:0][INC_W-1:0] out_inc;
  int checks = 0, failures = 0;

  bh_score_attributor #(.N(N), .ACT_W(ACT_W), .FRAC_W(FRAC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { bit v; int inc [N]; } exp_t;
  exp_t pipe [$];

  initial begin
    exp_t e;
    int nvalid;
    nvalid = 0;
    for (int k = 0; k < LAT; k++) begin e.v = 0; pipe.push_back(e); end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // output for the input driven LAT cycles ago
      e = pipe.pop_front();
      checks++;
      if (out_valid !== e.v) begin
        failures++; $display("cyc %0d out_valid=%0b exp %0b", cyc, out_valid, e.v);
      end
      if (e.v) begin
        nvalid++;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (int'(out_inc[i]) != e.inc[i]) begin
            failures++; $display("cyc %0d lane %0d inc=%0d exp %0d", cyc, i, out_inc[i], e.inc[i]);
          end
        end
      end
      // new input
      in_valid = ($urandom_range(0, 3) != 0);
      begin
        longint tot;
        int mode;
        tot = 0;
        mode = $urandom_range(0, 9);
        for (int i = 0; i < N; i++) begin
          case (mode)
            0: in_act[i] = '0;                                  // empty snapshot
            1: in_act[i] = (i == 0) ? 16'hFFFF : 16'h0;           // one thread only
            2: in_act[i] = ACT_W'($urandom_range(0, 3));
            3: in_act[i] = 16'hFFFF;                              // all saturated
            default: in_act[i] = ACT_W'($urandom_range(0, 65535) >> $urandom_range(0, 15));
          endcase
          tot += in_act[i];
        end
        in_total = TOT_W'(tot);
        e.v = in_valid;
        for (int i = 0; i < N; i++)
          e.inc[i] = (tot == 0) ? 0 : int'((longint'(in_act[i]) * 128) / tot);
        pipe.push_back(e);
      end
    end
    checks++;
    if (nvalid < 1000) begin failures++; $display("too few results %0d", nvalid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
