// tb_gate_engine: tests the gate engine in its real surroundings (crossbar, banks,
// forwarding network, OoR fetchers) with two engines and a 32-entry SWW, once in the
// Garbler role (Half-Gate garbler unit, table output) and once in the Evaluator role
// (Half-Gate evaluator unit, table queue). haac_bench supplies a random program and
// checks every live wire, table and counter, and that each engine mechanism occurred.
module tb_gate_engine;
  import haac_pkg::*;
  localparam int NUM_GE = 2, NWIRES = 32, NUM_BANKS = 4;
  int checks = 0, failures = 0;

  for (genvar k = 0; k < 2; k++) begin : g_role
    logic                      clk, rst_n, start, pl_valid, pl_ready, mrd_valid, mrd_ready;
    logic                      mrd_resp_valid, mrd_resp_vbit, mwr_valid, mwr_ready, busy;
    logic [31:0]               cfg_wire_base;
    logic [$clog2(NWIRES)-1:0] cfg_phys_base, pl_addr;
    label_t                    cfg_r, pl_data, mrd_resp_data, mwr_data;
    logic   [NUM_GE-1:0]       iq_valid, iq_ready, tq_valid, tq_ready, oa_valid, oa_ready;
    logic   [NUM_GE-1:0]       tout_valid, tout_ready;
    instr_t                    iq_data [NUM_GE];
    table_t                    tq_data [NUM_GE];
    table_t                    tout_data [NUM_GE];
    daddr_t                    oa_addr [NUM_GE];
    daddr_t                    mrd_addr, mwr_addr;
    logic [$clog2(NUM_GE)-1:0] mrd_id, mrd_resp_id;
    perf_t                     perf;
    logic                      done;
    int                        checks, failures;

    haac_top #(.NUM_GE(NUM_GE), .NWIRES(NWIRES), .NUM_BANKS(NUM_BANKS), .GARBLER(k),
               .LQ_DEPTH(2))
      u_dut (.*);
    haac_bench #(.NUM_GE(NUM_GE), .NWIRES(NWIRES), .GARBLER(k), .NIN(8), .NBUNDLE(120))
      u_bench (.*);
  end

  initial begin
    fork
      begin
        wait (g_role[0].done && g_role[1].done);
        checks   = g_role[0].checks + g_role[1].checks;
        failures = g_role[0].failures + g_role[1].failures;
      end
      begin
        #(2000000);
        failures = g_role[0].failures + g_role[1].failures + 1;
        checks   = g_role[0].checks + g_role[1].checks;
        $display("watchdog: bench did not finish (garbler done=%0d, evaluator done=%0d)",
                 g_role[1].done, g_role[0].done);
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
