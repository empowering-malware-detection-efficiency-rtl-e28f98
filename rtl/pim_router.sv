// pim_router: the crossbar that connects the nine LUT cores of a cluster
// with each other through the cluster memory.
//
// Every read and write port in the cluster is reachable from every other one
// in the same cycle, so all cores can be fed and drained in parallel. The
// read side routes any two of the NIB_REGS cluster-memory nibbles to each
// core's A and B inputs. The write side steers the low and high result nibble
// of each core into any cluster-memory nibble. When two cores write the same
// nibble in one step the higher-numbered core wins; the micro-programs never
// do this, and an assertion flags it.
//
// Interface: mem_rd is the whole cluster memory; ops holds, per core, the
// select fields of the current micro-program step; core_res are the core
// results. Outputs: core_a/core_b to the cores; wr_en/wr_data, one entry per
// cluster-memory nibble, to the cluster memory. Purely combinational.
//
// From the paper: a router connecting the read/write ports of all cores of a
// cluster for direct, parallel communication. Its realisation as a
// nibble-wide full crossbar with per-step selects is this design's own.
module pim_router
  import pim_pkg::*;
(
  input  nibble_t    mem_rd   [NIB_REGS],
  input  step_t      ops,
  input  logic [7:0] core_res [NUM_CORES],
  input  logic       wr_phase,             // write results back this cycle
  output nibble_t    core_a   [NUM_CORES],
  output nibble_t    core_b   [NUM_CORES],
  output logic       wr_en    [NIB_REGS],
  output nibble_t    wr_data  [NIB_REGS]
);

  always_comb begin
    for (int k = 0; k < NUM_CORES; k++) begin
      core_a[k] = mem_rd[ops[k].a];
      core_b[k] = mem_rd[ops[k].b];
    end
  end

  always_comb begin
    for (int r = 0; r < NIB_REGS; r++) begin
      wr_en[r]   = 1'b0;
      wr_data[r] = '0;
      for (int k = 0; k < NUM_CORES; k++) begin
        if (wr_phase && ops[k].en && ops[k].wlo && ops[k].lo == reg_idx_t'(r)) begin
          wr_en[r]   = 1'b1;
          wr_data[r] = core_res[k][3:0];
        end
        if (wr_phase && ops[k].en && ops[k].whi && ops[k].hi == reg_idx_t'(r)) begin
          wr_en[r]   = 1'b1;
          wr_data[r] = core_res[k][7:4];
        end
      end
    end
  end

  // At most one writer per nibble in a step.
  function automatic int unsigned writers(input step_t s, input int r);
    int unsigned n = 0;
    for (int k = 0; k < NUM_CORES; k++) begin
      if (s[k].en && s[k].wlo && s[k].lo == reg_idx_t'(r)) n++;
      if (s[k].en && s[k].whi && s[k].hi == reg_idx_t'(r)) n++;
    end
    return n;
  endfunction

  always_comb begin
    if (wr_phase) begin
      for (int r = 0; r < NIB_REGS; r++)
        assert (writers(ops, r) <= 1) else $error("pim_router: write conflict on nibble %0d", r);
    end
  end

endmodule
