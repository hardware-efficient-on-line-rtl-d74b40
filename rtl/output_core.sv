// output_core: the special top-layer core (core 15) of C output neurons.
//
// The output neurons are not binary.  Their accumulators sum the weighted binary outputs of
// the last hidden layer (CMD_TARGET, as in any core), and each CMD_TARGET also returns the
// neuron's stored top-layer error e_z.  On CMD_TOP_UPDATE the core spends C cycles, one per
// output neuron, finding the neuron with the largest accumulator (the classification; ties go
// to the lower index) and evaluating the hinge-loss gradient
//     e_z[i] = theta(z[i] + H - z[p])            for i != p
//     e_z[p] = -sum_{j != p} theta(z[j] + H - z[p])
// where p is the label set by CMD_SET_LABEL and H the hinge register.  In the C-th cycle it
// stores the errors, clears the accumulators, updates class_o/correct_o and raises rsp_valid.
// The other commands respond one cycle after they are accepted.  The errors lie in
// [-(C-1), 1] and are returned untruncated.  Accumulators and errors are registers (the
// paper's resource table gives this core no block RAM); the register layout is this design's.
module output_core
  import bsn_pkg::*;
#(
  parameter int unsigned CORE_ID = TOP_CORE,
  parameter int unsigned C       = NUM_CLASSES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ACC_W-1:0] hinge,      // H
  input  logic                    cmd_valid,
  input  core_cmd_t               cmd,
  output logic                    rsp_valid,
  output core_rsp_t               rsp,
  output logic [3:0]              class_o,    // last classification result
  output logic                    correct_o,  // last classification matched the label
  output logic                    busy
);

  localparam int IW = (C > 1) ? $clog2(C) : 1;

  logic signed [ACC_W-1:0] z   [C];
  logic signed [ERR_W-1:0] ez  [C];
  logic [3:0]              label_q;
  logic                    sweep;
  logic [IW-1:0]           idx;
  logic [IW-1:0]           best_idx;
  logic signed [ACC_W-1:0] best_val;
  logic [ERR_W-1:0]        viol_cnt;
  logic                    rsp_q;
  logic signed [ERR_W-1:0] rsp_err_q;

  wire sel = cmd_valid && (cmd.core == CORE_ID[CORE_W-1:0]) && !sweep;

  // hinge test of the neuron visited in this sweep cycle
  logic signed [ACC_W+1:0] margin;
  logic                    viol;
  logic                    is_label;
  logic                    last;
  logic signed [ACC_W-1:0] z_label;
  always_comb begin
    z_label  = z[label_q[IW-1:0]];
    margin   = (ACC_W+2)'(z[idx]) + (ACC_W+2)'(hinge) - (ACC_W+2)'(z_label);
    is_label = (idx == label_q[IW-1:0]);
    viol     = !is_label && (margin > 0);
    last     = (idx == IW'(C - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C; i++) begin
        z[i]  <= '0;
        ez[i] <= '0;
      end
      label_q   <= '0;
      sweep     <= 1'b0;
      idx       <= '0;
      best_idx  <= '0;
      best_val  <= '0;
      viol_cnt  <= '0;
      rsp_q     <= 1'b0;
      rsp_err_q <= '0;
      class_o   <= '0;
      correct_o <= 1'b0;
    end else begin
      rsp_q <= 1'b0;
      if (sel) begin
        unique case (cmd.op)
          CMD_SET_LABEL: begin
            label_q <= cmd.data[3:0];
            rsp_q   <= 1'b1;
          end
          CMD_TARGET: begin
            if (cmd.neuron < NADDR_W'(C)) begin
              if (cmd.add_en) z[cmd.neuron[IW-1:0]] <= z[cmd.neuron[IW-1:0]] + cmd.data;
              rsp_err_q <= ez[cmd.neuron[IW-1:0]];
            end else begin
              rsp_err_q <= '0;
            end
            rsp_q <= 1'b1;
          end
          CMD_TOP_UPDATE: begin
            sweep    <= 1'b1;
            idx      <= '0;
            viol_cnt <= '0;
          end
          default: rsp_q <= 1'b1;
        endcase
      end
      if (sweep) begin
        // running maximum and hinge violations, one neuron per cycle
        if (idx == '0 || z[idx] > best_val) begin
          best_val <= z[idx];
          best_idx <= idx;
        end
        ez[idx] <= viol ? ERR_W'(1) : '0;
        if (last) begin
          sweep <= 1'b0;
          ez[label_q[IW-1:0]] <= -$signed(viol_cnt + ERR_W'(viol));
          if (idx == '0 || z[idx] > best_val) class_o <= 4'(idx);
          else                               class_o <= 4'(best_idx);
          correct_o <= ((idx == '0 || z[idx] > best_val) ? 4'(idx) : 4'(best_idx)) == label_q;
          for (int i = 0; i < C; i++) z[i] <= '0;
        end else begin
          idx <= idx + 1'b1;
        end
        viol_cnt <= viol_cnt + ERR_W'(viol);
      end
    end
  end

  assign rsp_valid = rsp_q || (sweep && last);
  assign busy      = sweep;
  always_comb begin
    rsp     = '0;
    rsp.err = rsp_err_q;
  end

endmodule
