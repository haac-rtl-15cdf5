// oorw_fetch: the off-chip side of one gate engine's out-of-range wire (OoRW) queue.
//
// The compiler knows in advance which input wires will be outside the SWW's range and
// in what order an engine will need them. It streams their 32-bit DRAM wire addresses
// on chip; this controller takes them in order, reads each wire from DRAM and pushes
// its label into the engine's OoRW queue. Each wire in DRAM carries a valid bit: a live
// wire may still be on its way to DRAM when it is first requested, so a read that
// returns an invalid wire is simply repeated until a valid copy arrives, as the paper
// specifies. Wires thus reach the queue strictly in address-stream order.
//
// Interface: `addr_*` is the incoming address stream (valid/ready); `mem_req_*` is a
// read request (valid/ready) and `mem_resp_*` its response (label and valid bit);
// `q_*` pushes into the OoRW queue (valid/ready). `retry` pulses for each repeated read.
// Timing: one read outstanding at a time (this design's choice; the paper gives no
// DRAM interface), so throughput is one wire per DRAM round trip per engine.
module oorw_fetch
  import haac_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   addr_valid,
  output logic   addr_ready,
  input  daddr_t addr,
  output logic   mem_req_valid,
  input  logic   mem_req_ready,
  output daddr_t mem_req_addr,
  input  logic   mem_resp_valid,
  input  logic   mem_resp_vbit,
  input  label_t mem_resp_data,
  output logic   q_valid,
  input  logic   q_ready,
  output label_t q_data,
  output logic   retry
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_PUSH} state_e;
  state_e state;
  daddr_t cur;
  label_t lbl;

  assign addr_ready    = (state == S_IDLE);
  assign mem_req_valid = (state == S_REQ);
  assign mem_req_addr  = cur;
  assign q_valid       = (state == S_PUSH);
  assign q_data        = lbl;
  assign retry         = (state == S_WAIT) && mem_resp_valid && !mem_resp_vbit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      lbl   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (addr_valid) begin
          cur   <= addr;
          state <= S_REQ;
        end
        S_REQ:  if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          if (mem_resp_vbit) begin
            lbl   <= mem_resp_data;
            state <= S_PUSH;
          end else begin
            state <= S_REQ;
          end
        end
        S_PUSH: if (q_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
