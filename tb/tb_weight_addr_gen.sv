// tb_weight_addr_gen: self-checking test of the weight address generator.
// For every layer phase and random groups/indices the bench computes the
// expected buffer, row and enable from the row layout (input row = feature;
// spike row = L*64 + i mod 64 in buffer i/64; FC row = pair*128 + i, last
// group 896 + i mod 64) and compares all outputs.
module tb_weight_addr_gen;
  import rsnn_pkg::*;
  logic clk = 0;
  state_e state = ST_L0_INPUT;
  logic two_ts = 0, fc_last = 0;
  logic [3:0] fc_pair = 0;
  logic [1:0][5:0] grp = '0;
  logic [1:0][2:0] idx = '0;
  logic [1:0] valid = '0;
  logic in_en;
  logic [5:0] in_addr;
  logic [1:0] sp_en, fc_en;
  logic [1:0][7:0] sp_addr;
  logic [1:0][9:0] fc_addr;
  wsrc_e [1:0] src;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  weight_addr_gen dut (.*);
  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s state=%s two_ts=%0d grp=%0d/%0d idx=%0d/%0d", s, state.name(), two_ts, grp[0], grp[1], idx[0], idx[1]);
  endtask
  initial begin
    state_e sts[5] = '{ST_L0_INPUT, ST_L0_REC, ST_L1_FF, ST_L1_REC, ST_FC};
    for (int k = 0; k < 5000; k++) begin
      int i0, i1, L;
      @(negedge clk);
      state = sts[$urandom_range(4)];
      two_ts = 1'($urandom);
      valid = 2'($urandom);
      idx = {3'($urandom), 3'($urandom)};
      fc_last = (state == ST_FC) && ($urandom_range(7) == 0);
      fc_pair = fc_last ? 4'd7 : 4'($urandom_range(6));
      if (state == ST_L0_INPUT) begin
        grp[0] = 6'($urandom_range(39)); grp[1] = grp[0];
      end else if ((state !== ST_FC && two_ts) || (state == ST_FC && !fc_last)) begin
        grp[0] = 6'($urandom_range(15)); grp[1] = grp[0]; idx[1] = idx[0];
      end else begin
        grp[0] = 6'($urandom_range(7)); grp[1] = 6'($urandom_range(8, 15));
      end
      #1;
      i0 = grp[0] * 8 + idx[0]; i1 = grp[1] * 8 + idx[1];
      L = (state == ST_L0_REC) ? 0 : (state == ST_L1_FF) ? 1 : 2;
      checks++;
      case (state)
        ST_L0_INPUT: begin
          if (in_en !== (valid !== 0) || in_addr !== grp[0] || sp_en !== 0 || fc_en !== 0 || src[0] !== WS_IN || src[1] !== WS_IN)
            fail("input");
        end
        ST_FC: begin
          int e0, e1;
          e0 = fc_last ? 896 + i0 % 64 : fc_pair * 128 + i0;
          e1 = fc_last ? 896 + i1 % 64 : fc_pair * 128 + i1;
          if ((valid[0] && fc_addr[0] !== 10'(e0)) || (valid[1] && fc_addr[1] !== 10'(e1)) ||
              fc_en !== valid || sp_en !== 0 || in_en || src[0] !== WS_FC1 || src[1] !== WS_FC2)
            fail("fc");
        end
        default: begin
          if (two_ts) begin
            logic [1:0] een;
            een = '0; een[i0 / 64] = valid[0];
            if (sp_en !== een || (valid[0] && sp_addr[i0 / 64] !== 8'(L * 64 + i0 % 64)) ||
                src[0] !== (i0 >= 64 ? WS_SP1 : WS_SP0) || src[1] !== src[0] || in_en || fc_en !== 0)
              fail("rec 2ts");
          end else begin
            if (sp_en !== valid || (valid[0] && sp_addr[0] !== 8'(L * 64 + i0)) ||
                (valid[1] && sp_addr[1] !== 8'(L * 64 + i1 - 64)) ||
                src[0] !== WS_SP0 || src[1] !== WS_SP1 || in_en || fc_en !== 0)
              fail("rec 1ts");
          end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
