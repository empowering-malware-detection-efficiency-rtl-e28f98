// pim_router_tb: drives the cluster crossbar with random selects and data.
//
// Each trial fills the cluster memory and the core results with random
// nibbles and gives every core random source nibbles and distinct random
// destinations (no two writers share one). It checks that each core sees the
// nibbles it selected, that each destination receives the right half of the
// right core's result, that nothing else is written and that nothing at all
// is written outside the write phase. The router is combinational, so the
// outputs are sampled after a 1-time-unit settle.
module pim_router_tb;
  import pim_pkg::*;

  nibble_t    mem_rd   [NIB_REGS];
  step_t      ops;
  logic [7:0] core_res [NUM_CORES];
  logic       wr_phase;
  nibble_t    core_a   [NUM_CORES];
  nibble_t    core_b   [NUM_CORES];
  logic       wr_en    [NIB_REGS];
  nibble_t    wr_data  [NIB_REGS];
  int checks = 0, failures = 0;

  pim_router dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      int perm [NIB_REGS];
      int exp_src [NIB_REGS];   // -1: no write, else 2*core + hi
      for (int r = 0; r < NIB_REGS; r++) begin
        mem_rd[r] = 4'($urandom);
        perm[r] = r;
        exp_src[r] = -1;
      end
      perm.shuffle();
      for (int k = 0; k < NUM_CORES; k++) begin
        core_res[k] = 8'($urandom);
        ops[k].en  = ($urandom_range(3) != 0);
        ops[k].a   = 5'($urandom);
        ops[k].b   = 5'($urandom);
        ops[k].wlo = $urandom_range(1);
        ops[k].whi = $urandom_range(1);
        ops[k].lo  = 5'(perm[2*k]);
        ops[k].hi  = 5'(perm[2*k+1]);
        if (ops[k].en && ops[k].wlo) exp_src[perm[2*k]]   = 2*k;
        if (ops[k].en && ops[k].whi) exp_src[perm[2*k+1]] = 2*k + 1;
      end
      wr_phase = (t % 4 != 0);
      #1;
      for (int k = 0; k < NUM_CORES; k++) begin
        check(core_a[k] == mem_rd[ops[k].a], $sformatf("t%0d core %0d A", t, k));
        check(core_b[k] == mem_rd[ops[k].b], $sformatf("t%0d core %0d B", t, k));
      end
      for (int r = 0; r < NIB_REGS; r++) begin
        if (!wr_phase || exp_src[r] < 0) begin
          check(wr_en[r] == 1'b0, $sformatf("t%0d nibble %0d written", t, r));
        end else begin
          logic [7:0] v;
          v = core_res[exp_src[r] / 2];
          check(wr_en[r] == 1'b1, $sformatf("t%0d nibble %0d not written", t, r));
          check(wr_data[r] == ((exp_src[r] % 2) ? v[7:4] : v[3:0]),
                $sformatf("t%0d nibble %0d data", t, r));
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
