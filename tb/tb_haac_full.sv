// tb_haac_full: runs the accelerator at the paper's full size, as haac_top's defaults
// build it (16 Evaluator engines, a 131072-label SWW in 64 banks), on a random program
// of 60 bundles (960 slots) from haac_bench. Every live wire and counter is checked.
// The program is far shorter than the window, so it does not wrap; the SWW reads it
// makes out of range are inputs sent to DRAM on purpose.
module tb_haac_full;
  import haac_pkg::*;
  localparam int NUM_GE = 16, NWIRES = 131072;
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

  haac_top u_dut (.*);
  haac_bench #(.NUM_GE(NUM_GE), .NWIRES(NWIRES), .GARBLER(1'b0), .NIN(64), .NBUNDLE(60),
               .REQUIRE_ALL(1'b0)) u_bench (.*);

  int watchdog = 0;

  initial begin
    fork
      wait (done);
      begin
        #(2000000);
        watchdog = 1;
        $display("watchdog: bench did not finish");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + watchdog);
    $finish;
  end
endmodule
