// tb_haac_top: end-to-end test of the accelerator at a reduced size (4 engines, a
// 64-entry SWW in 8 banks, so the window wraps many times). Two copies run side by side,
// one built as a Garbler and one as an Evaluator, each driven by haac_bench with its own
// random 600-slot program: every live wire, every garbled table, the gate, operand and
// issue counters, and the occurrence of each pipeline mechanism are checked.
module tb_haac_top;
  import haac_pkg::*;
  localparam int NUM_GE = 4, NWIRES = 64, NUM_BANKS = 8;
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
    haac_bench #(.NUM_GE(NUM_GE), .NWIRES(NWIRES), .GARBLER(k), .NIN(16), .NBUNDLE(150))
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
