// tb_conv_engine: checks the roll-unrolled engine against the product model of
// the reference package, for a 3x3 shift-weight engine and a 1x1 fixed-point
// engine. Random windows and weight words arrive with random en (pipeline
// stalls) and random invalid positions. Every input beat group (C/U beats,
// first..last) must come out as one result of C' exact sums, in order, and
// during stalls the result must be held. Drive and check happen at negedge:
// a beat or result present while en is high is taken at the next posedge.
module tb_conv_engine;
  import tomato_pkg::*;
  import tomato_ref_pkg::*;
  localparam int NC = 2;
  localparam layer_cfg_t CFGS [NC] = '{
    mk(L_CONV, A_SHIFT, 3, 1, 6, 3, 2, 1, 3, 2, 1'b1),
    mk(L_CONV, A_FIXED, 1, 1, 12, 5, 4, 1, 6, 4, 1'b1)
  };
  int checks = 0, failures = 0, done_cnt = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  for (genvar g = 0; g < NC; g++) begin : g_c
    localparam layer_cfg_t LC = CFGS[g];
    localparam int K = LC.k, KK = K * K, U = LC.u, CO = LC.cout, WB = LC.wb, NB = LC.cin / LC.u;
    localparam int PW = prod_w(LC.arith, WB);
    localparam int AW = PW + clog2c(LC.cin * KK) + 1;
    typedef longint vec_t [CO];
    logic en;
    logic [KK-1:0][U-1:0][7:0] win;
    logic [CO*U*KK*WB-1:0] wgt;
    beat_t ctl;
    logic signed [CO-1:0][AW-1:0] res;
    logic res_valid;
    beat_t tail;
    longint exp_q[$];   // CO sums per expected result
    vec_t part;
    int gi = 0, n_stall_hold = 0, n_res = 0;
    logic gvalid = 1;

    conv_engine #(.K(K), .U(U), .C(LC.cin), .CO(CO), .ARITH(LC.arith), .WB(WB)) dut (
      .clk(clk), .rst_n(rst_n), .en(en), .win(win), .wgt(wgt), .ctl_in(ctl),
      .res(res), .res_valid(res_valid), .tail(tail));

    logic flush = 0;
    task automatic drive();
      ctl.valid = gvalid;
      ctl.first = (gi == 0);
      ctl.last  = (gi == NB - 1);
      ctl.blk   = 16'(gi);
      for (int t = 0; t < KK; t++)
        for (int u = 0; u < U; u++) win[t][u] = 8'($urandom_range(255));
      for (int i = 0; i < CO * U * KK; i++) begin
        int code;
        code = (LC.arith == A_SHIFT) ? int'($urandom_range((1 << WB) - 1))
                                     : int'($urandom_range((1 << WB) - 1)) - (1 << (WB - 1));
        wgt[i*WB +: WB] = WB'(code);
      end
      en = flush ? 1'b1 : 1'($urandom_range(3) != 0);
    endtask

    // model the beat on the inputs (taken at the next posedge since en is high)
    task automatic take_beat();
      for (int o = 0; o < CO; o++) begin
        longint s;
        s = 0;
        for (int u = 0; u < U; u++)
          for (int t = 0; t < KK; t++) begin
            int code, wi;
            wi = ((o * U + u) * KK + t) * WB;
            code = (LC.arith == A_SHIFT) ? int'(wgt[wi +: WB])
                                         : int'($signed(wgt[wi +: WB]));
            s += prod(LC, int'($signed(win[t][u])), code);
          end
        part[o] = (gi == 0) ? s : part[o] + s;
      end
      if (ctl.valid && gi == NB - 1)
        for (int o = 0; o < CO; o++) exp_q.push_back(part[o]);
      gi = (gi == NB - 1) ? 0 : gi + 1;
      if (gi == 0) gvalid = !flush && ($urandom_range(4) != 0);
    endtask

    initial begin
      logic signed [CO-1:0][AW-1:0] held;
      logic was_stalled;
      en = 0; ctl = '0; win = '0; wgt = '0;
      was_stalled = 0;
      wait (rst_n);
      for (int cyc = 0; cyc < 3000 + 40; cyc++) begin
        @(negedge clk);
        // result held while stalled
        if (was_stalled) begin
          checks++;
          if (res_valid !== 1'b1 || res !== held) begin
            failures++;
            $display("engine %0d: result not held during stall", g);
          end
          n_stall_hold++;
        end
        was_stalled = 0;
        if (res_valid && en) begin
          checks++;
          n_res++;
          if (exp_q.size() == 0) begin
            failures++;
            $display("engine %0d: unexpected result", g);
          end else begin
            for (int o = 0; o < CO; o++) begin
              longint e;
              e = exp_q.pop_front();
              if (longint'($signed(res[o])) != e) begin
                failures++;
                if (failures < 10) $display("engine %0d ch %0d: got %0d exp %0d", g, o,
                                            longint'($signed(res[o])), e);
              end
            end
          end
        end
        if (en) take_beat();
        flush = (cyc >= 3000);
        drive();
        if (res_valid && !en) begin
          was_stalled = 1;
          held = res;
        end
      end
      checks++;
      if (exp_q.size() != 0 || n_res < 100 || n_stall_hold == 0) begin
        failures++;
        $display("engine %0d: %0d values left, %0d seen, %0d held stalls", g, exp_q.size(), n_res, n_stall_hold);
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_cnt == NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
