// tb_bn_relu: loads random Q8.8 scale/offset words through the chunked load port
// and feeds random accumulator values with random chunk indices; every output
// must equal the reference BN/ReLU/rounding model two cycles after its input.
// Two instances: ReLU on (weight fraction 4) and ReLU off (weight fraction 2).
// The run must see ReLU clipping and saturation at both ends.
module tb_bn_relu;
  import tomato_pkg::*;
  import tomato_ref_pkg::*;
  localparam int NC = 2, NO = 4, NCH = 3, AW = 18, LW = 64;
  localparam layer_cfg_t CFGS [NC] = '{
    mk(L_CONV, A_FIXED, 1, 1, 8, NO * NCH, 8, NO, 6, 4, 1'b1),
    mk(L_CONV, A_FIXED, 1, 1, 8, NO * NCH, 8, NO, 4, 2, 1'b0)
  };
  int checks = 0, failures = 0, done_cnt = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  for (genvar g = 0; g < NC; g++) begin : g_c
    localparam layer_cfg_t LC = CFGS[g];
    logic in_valid = 0, out_valid, ld_en = 0;
    logic signed [NO-1:0][AW-1:0] in_data = '0;
    logic [15:0] in_idx = 0, ld_addr = 0, ld_chunk = 0;
    logic [LW-1:0] ld_data = '0;
    logic [NO-1:0][ACT_W-1:0] out_data;
    int w[], sc[], of[];
    int exp_q[$];      // per input beat: valid flag then NO values
    int n_relu = 0, n_sat = 0, n_hi = 0, n_lo = 0;

    bn_relu #(.NO(NO), .NCH(NCH), .AW(AW), .WFRAC(LC.wfrac), .RELU(LC.relu), .LW(LW)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .in_idx(in_idx),
      .out_valid(out_valid), .out_data(out_data), .ld_en(ld_en), .ld_addr(ld_addr),
      .ld_chunk(ld_chunk), .ld_data(ld_data));

    initial begin
      word_t wd;
      gen_layer(LC, w, sc, of);
      wait (rst_n);
      for (int j = 0; j < NCH; j++) begin
        wd = bn_word(LC, sc, of, j);
        for (int c = 0; c * LW < 32 * NO; c++) begin
          @(negedge clk);
          ld_en = 1; ld_addr = 16'(j); ld_chunk = 16'(c); ld_data = wd[c*LW +: LW];
        end
      end
      @(negedge clk);
      ld_en = 0;
      for (int cyc = 0; cyc < 3000; cyc++) begin
        @(negedge clk);
        // the beat driven two negedges ago is at the output now
        if (exp_q.size() >= 2 * (NO + 1)) begin
          int v;
          v = exp_q.pop_front();
          checks++;
          if (out_valid !== 1'(v)) begin
            failures++;
            $display("bn %0d: out_valid %0b, expected %0d", g, out_valid, v);
          end
          for (int n = 0; n < NO; n++) begin
            int e;
            e = exp_q.pop_front();
            if (v != 0) begin
              checks++;
              if (int'($signed(out_data[n])) != e) begin
                failures++;
                if (failures < 10) $display("bn %0d lane %0d: got %0d exp %0d", g, n,
                                            int'($signed(out_data[n])), e);
              end
              if (e == 127) n_hi++;
              if (e == -128) n_lo++;
            end
          end
        end
        in_valid = 1'($urandom_range(3) != 0);
        in_idx = 16'($urandom_range(NCH - 1));
        exp_q.push_back(int'(in_valid));
        for (int n = 0; n < NO; n++) begin
          // mostly values of activation size, sometimes the full accumulator range
          int x;
          x = ($urandom_range(3) == 0) ? int'($urandom_range((1 << AW) - 1)) - (1 << (AW - 1))
                                       : int'($urandom_range(1 << (LC.wfrac + 9))) - (1 << (LC.wfrac + 8));
          in_data[n] = AW'(x);
          exp_q.push_back(bn(LC, longint'(x), sc[in_idx * NO + n], of[in_idx * NO + n], n_relu, n_sat));
        end
      end
      checks++;
      if ((LC.relu && n_relu == 0) || n_sat == 0 || n_hi == 0 || (!LC.relu && n_lo == 0)) begin
        failures++;
        $display("bn %0d: relu %0d sat %0d hi %0d lo %0d", g, n_relu, n_sat, n_hi, n_lo);
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
