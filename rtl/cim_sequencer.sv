// cim_sequencer -- timing of one CAM-selected multibit computation cycle.
//
// One computation cycle of the plane has two parts (the paper's optimised timing):
//   1. Initial delay: the unselected WLs are precharged to Vpass, SSL/GSL are opened and the
//      input levels are put on the source lines (and the expert query on the CAM WLs). This
//      phase is long because of the large RC of the NAND word lines.
//   2. Additional delay: the selected WL is stepped through the read levels VR1 .. VR(m-1),
//      one short pulse each, and the BL current of every pulse is sensed separately.
// Here the first phase lasts T_PRE clock cycles and each read pulse T_READ cycles; both are
// this design's choices (the paper gives no cycle counts, only that t2 per pulse is a small
// fraction of t1). In the last cycle of every pulse `sense` is high, so the plane latches the BL
// current at that clock edge; one cycle later `acc_en` is high while the digitised value is added.
//
// Interface: `start` is taken when `busy` is low. `bias_on` is high from the first precharge
// cycle to the last read cycle. `read_on` is high during read pulses, with `read_level` the read
// level index L of the current pulse (pulse k = 1..m-1 uses VR_k, coded as L = k-1 because a
// cell in state s conducts at VR_k when s < k). `acc_clear` is high for the cycle that accepts
// `start`; `done` is high for one cycle after the last value was accumulated.
// Latency: `done` comes T_PRE + (M_STATES-1)*T_READ + 2 cycles after the `start` cycle.
module cim_sequencer
  import nasic_pkg::*;
#(
  parameter int unsigned M_STATES = 4,
  parameter int unsigned T_PRE    = 8,
  parameter int unsigned T_READ   = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic bias_on,
  output logic read_on,
  output vth_t read_level,
  output logic sense,
  output logic acc_clear,
  output logic acc_en,
  output logic done
);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_READ, S_SETTLE, S_DONE} state_e;

  localparam int unsigned CNT_W = $clog2((T_PRE > T_READ ? T_PRE : T_READ) + 1);

  state_e           state;
  logic [CNT_W-1:0] cnt;
  vth_t             pulse;   // 0-based pulse number = read level index

  initial begin
    assert (T_PRE >= 1 && T_READ >= 1) else $error("phase lengths must be at least one cycle");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cnt    <= '0;
      pulse  <= '0;
      acc_en <= 1'b0;
    end else begin
      acc_en <= sense;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PRE;
          cnt   <= '0;
          pulse <= '0;
        end
        S_PRE: begin
          if (cnt == CNT_W'(T_PRE - 1)) begin
            state <= S_READ;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_READ: begin
          if (cnt == CNT_W'(T_READ - 1)) begin
            cnt <= '0;
            if (pulse == vth_t'(M_STATES - 2)) state <= S_SETTLE;
            else pulse <= pulse + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_SETTLE: state <= S_DONE;
        S_DONE:   state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != S_IDLE);
    bias_on    = (state == S_PRE) || (state == S_READ);
    read_on    = (state == S_READ);
    read_level = pulse;
    sense      = (state == S_READ) && (cnt == CNT_W'(T_READ - 1));
    acc_clear  = (state == S_IDLE) && start;
    done       = (state == S_DONE);
  end

endmodule
