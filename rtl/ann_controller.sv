// Control signal block of the in-memory ANN.
//
// It sequences the whole network, following the timing diagram of the design:
//
//   start -> precharge + functional read of all weight rows (fr_start, wait
//   fr_done) -> phi_s: every WU unit samples its signed weight -> then
//   training (train = 1), for up to P epochs of L samples each:
//     LOAD  one cycle in which sample_idx is stable and the inputs settle
//     FF    S=01, layer by layer; after FF_CYC cycles per layer
//           phi_out[K] samples that layer's activation potential
//     ERR   S=00 for ERR_CYC cycles; on the last one err_sample adds V_E to
//           the error monitor and phi_dl[XI-1] holds the output-layer error
//     BP    S=11, from the last layer back to the first, BP_CYC cycles
//           each; the step of layer K ends with phi_dl[K-1], which holds the
//           gradient sum arriving at layer K-1 (no pulse for K = 0)
//     WU    S=10 with one-cycle pulses phi_b, phi_l, phi_u in that order
//   after the L-th sample epoch_end pulses; training ends after P epochs, or
//   earlier when stop_en is set and err_not_decr (the epoch error did not
//   fall) is high in the epoch_end cycle. Then write-back: for every column
//   c = 0..NCOL_MAX-1, one cycle each, wb_col = c and wb_we = 1, so each
//   layer's signed flash ADC stores that column's weight in its array.
//   In inference (train = 0) each of the L samples gets LOAD and FF only,
//   followed by a one-cycle result_valid; nothing is written back.
//   done stays high until the next start.
//
// The order of the phases and of phi_out, phi_b, phi_l, phi_u follows the
// paper. The phi_dl gradient holds, the idle code S=00 between phases, the
// cycle counts, the early-stop rule and the reset are this design's choices.
module ann_controller
  import imc_ann_pkg::*;
#(
  parameter int XI       = 2,
  parameter int P        = 500,
  parameter int L        = 120,
  parameter int NCOL_MAX = 20,
  parameter int FF_CYC   = 2,
  parameter int ERR_CYC  = 2,
  parameter int BP_CYC   = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic                        train,
  input  logic                        stop_en,
  input  logic                        err_not_decr,
  input  logic                        fr_done,
  output logic                        fr_start,
  output sm_sel_e                     sel,
  output logic                        phi_s,
  output logic                        phi_b,
  output logic                        phi_l,
  output logic                        phi_u,
  output logic [XI-1:0]               phi_out,
  output logic [XI-1:0]               phi_dl,
  output logic                        err_sample,
  output logic                        epoch_end,
  output logic                        wb_we,
  output logic [$clog2(NCOL_MAX)-1:0] wb_col,
  output logic [15:0]                 sample_idx,
  output logic [15:0]                 epoch,
  output logic                        result_valid,
  output logic                        stopped_early,
  output logic                        busy,
  output logic                        done
);
  typedef enum logic [3:0] {
    S_IDLE, S_FR, S_SWC, S_LOAD, S_FF, S_RES, S_ERR, S_BP, S_WU, S_EPOCH, S_WB, S_DONE
  } st_e;

  st_e         st;
  logic        mode_train;
  logic [7:0]  cnt;                     // cycles spent in the current step
  logic [$clog2(XI+1)-1:0] layer;       // layer of the current FF/BP step

  // ---- state register ------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st            <= S_IDLE;
      mode_train    <= 1'b0;
      cnt           <= '0;
      layer         <= '0;
      sample_idx    <= '0;
      epoch         <= '0;
      wb_col        <= '0;
      stopped_early <= 1'b0;
    end else begin
      cnt <= cnt + 1'b1;
      unique case (st)
        S_IDLE, S_DONE:
          if (start) begin
            st            <= S_FR;
            mode_train    <= train;
            sample_idx    <= '0;
            epoch         <= '0;
            stopped_early <= 1'b0;
          end
        S_FR:  if (fr_done) st <= S_SWC;
        S_SWC: st <= S_LOAD;
        S_LOAD: begin st <= S_FF; cnt <= '0; layer <= '0; end
        S_FF:
          if (32'(cnt) == FF_CYC - 1) begin
            cnt <= '0;
            if (32'(layer) == XI - 1) st <= mode_train ? S_ERR : S_RES;
            else layer <= layer + 1'b1;
          end
        S_RES:
          if (32'(sample_idx) == L - 1) st <= S_DONE;
          else begin sample_idx <= sample_idx + 1'b1; st <= S_LOAD; end
        S_ERR:
          if (32'(cnt) == ERR_CYC - 1) begin
            st <= S_BP; cnt <= '0; layer <= ($clog2(XI+1))'(XI - 1);
          end
        S_BP:
          if (32'(cnt) == BP_CYC - 1) begin
            cnt <= '0;
            if (layer == '0) st <= S_WU;
            else layer <= layer - 1'b1;
          end
        S_WU:
          if (cnt == 8'd2) begin
            if (32'(sample_idx) == L - 1) st <= S_EPOCH;
            else begin sample_idx <= sample_idx + 1'b1; st <= S_LOAD; end
          end
        S_EPOCH: begin
          sample_idx <= '0;
          if (stop_en && err_not_decr) begin
            stopped_early <= 1'b1;
            st <= S_WB; wb_col <= '0;
          end else if (32'(epoch) == P - 1) begin
            st <= S_WB; wb_col <= '0;
          end else begin
            epoch <= epoch + 1'b1;
            st <= S_LOAD;
          end
        end
        S_WB:
          if (32'(wb_col) == NCOL_MAX - 1) st <= S_DONE;
          else wb_col <= wb_col + 1'b1;
        default: st <= S_IDLE;
      endcase
      if (st != S_FF && st != S_ERR && st != S_BP && st != S_WU) cnt <= '0;
    end

  // ---- outputs -------------------------------------------------------------
  always_comb begin
    fr_start     = (st == S_IDLE || st == S_DONE) && start;
    sel          = SM_IDLE;
    phi_s        = (st == S_SWC);
    phi_b        = (st == S_WU) && (cnt == 8'd0);
    phi_l        = (st == S_WU) && (cnt == 8'd1);
    phi_u        = (st == S_WU) && (cnt == 8'd2);
    phi_out      = '0;
    phi_dl       = '0;
    err_sample   = 1'b0;
    epoch_end    = (st == S_EPOCH);
    wb_we        = (st == S_WB);
    result_valid = (st == S_RES);
    busy         = (st != S_IDLE) && (st != S_DONE);
    done         = (st == S_DONE);
    unique case (st)
      S_FF: begin
        sel = SM_FF;
        if (32'(cnt) == FF_CYC - 1)
          for (int k = 0; k < XI; k++) if (k == 32'(layer)) phi_out[k] = 1'b1;
      end
      S_ERR:
        if (32'(cnt) == ERR_CYC - 1) begin
          err_sample     = 1'b1;
          phi_dl[XI-1]   = 1'b1;
        end
      S_BP: begin
        sel = SM_BP;
        if (32'(cnt) == BP_CYC - 1)
          for (int k = 0; k < XI - 1; k++) if (k + 1 == 32'(layer)) phi_dl[k] = 1'b1;
      end
      S_WU: sel = SM_WU;
      default: ;
    endcase
  end

  // ---- rules of the sequence -----------------------------------------------
  // S = 00 is never used while a product is sampled or stored
  a_no_idle_sample: assert property (@(posedge clk) disable iff (!rst_n)
      (|phi_out) |-> sel == SM_FF);
  a_wu_phases: assert property (@(posedge clk) disable iff (!rst_n)
      (phi_b || phi_l || phi_u) |-> sel == SM_WU);
  a_one_phase: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({phi_s, phi_b, phi_l, phi_u}));
endmodule
