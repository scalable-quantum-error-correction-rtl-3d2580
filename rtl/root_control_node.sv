// root_control_node: root of the controller tree; runs the stage sequence.
//
// It owns S4, the global stage broadcast to every PE, and follows the paper's
// FPGA-oriented controller algorithm:
//   GROWING    lasts one cycle (every PE grows its edges in a single cycle), then
//   MERGING    the root waits two cycles, until the PEs' busy bits reflect the
//              new growth, and then watches busy every cycle. When no PE is busy
//              the array is stable: if some PE is still odd, another GROWING
//              follows; otherwise the stage becomes
//   TERMINATE  which freezes every PE with its final cid and parent.
// Busy and odd arrive as one bit per leaf node and are ORed here.
//
// Own choices where the paper is silent: TERMINATE is also the idle state after
// reset; a one-cycle start pulse (given together with the PEs' syndrome load)
// begins a decode at GROWING; done rises when a decode reaches TERMINATE and
// stays until the next start. cycle_count counts the clock cycles from start to
// done (the paper measures decoding time in cycles) and iteration_count the
// GROWING stages, both saturating.
module root_control_node
  import helios_pkg::*;
#(
  parameter int unsigned N_LEAF = 21,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N_LEAF-1:0] leaf_busy,
  input  logic [N_LEAF-1:0] leaf_odd,
  output global_stage_t     global_stage,
  output logic              done,
  output logic [CNT_W-1:0]  cycle_count,
  output logic [CNT_W-1:0]  iteration_count
);

  localparam int unsigned MERGE_WAIT = 2;

  logic       any_busy;
  logic       any_odd;
  logic [1:0] wait_cnt;

  assign any_busy = |leaf_busy;
  assign any_odd  = |leaf_odd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      global_stage    <= GS_TERMINATE;
      wait_cnt        <= '0;
      done            <= 1'b0;
      cycle_count     <= '0;
      iteration_count <= '0;
    end else if (start) begin
      global_stage    <= GS_GROWING;
      wait_cnt        <= '0;
      done            <= 1'b0;
      cycle_count     <= '0;
      iteration_count <= '0;
    end else begin
      if (global_stage != GS_TERMINATE && cycle_count != '1) begin
        cycle_count <= cycle_count + 1'b1;
      end
      unique case (global_stage)
        GS_GROWING: begin
          global_stage <= GS_MERGING;
          wait_cnt     <= 2'(MERGE_WAIT);
          if (iteration_count != '1) iteration_count <= iteration_count + 1'b1;
        end
        GS_MERGING: begin
          if (wait_cnt != '0) begin
            wait_cnt <= wait_cnt - 1'b1;
          end else if (!any_busy) begin
            if (!any_odd) begin
              global_stage <= GS_TERMINATE;
              done         <= 1'b1;
            end else begin
              global_stage <= GS_GROWING;
            end
          end
        end
        default: ;
      endcase
    end
  end

endmodule
