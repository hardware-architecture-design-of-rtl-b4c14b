// top_controller: sequences one frame of the model-based reconstruction.
//
// The iteration it runs (t counts iterations, K = k_max):
//   I0     = DAS(S)                       t = 0
//   R1     = sWave(I0) - S                (residual, per execution cycle)
//   repeat t = 1..K:
//     I'_t = DAS(R_t)
//     I_t  = | I_{t-1} - lr * I'_t |      (deviation module)
//     R_t+1 = sWave(I_t) - S,  loss = ||R_t+1||
//     stop when loss < threshold or t = K, and output I_t
// States:
//   WAIT_LOAD  wait for the load unit to hold a full frame
//   COPY       copy the cc's LANES channels from the load unit into the DAS
//              sensor RAMs (M cycles, read one cycle ahead of the write)
//   DAS0       DAS pass for cc; after cc 3 the image goes to the deviation
//   DAS_OUT    DAS normalised output streams into the deviation module
//   DEV_OUT    deviation output streams into the s-Wave pixel RAM
//   SW         s-Wave pass for cc
//   LOSS       loss pass for cc (writes residuals into the DAS sensor RAMs)
//   DASR       DAS pass over the residual of cc
//   CHECK      after cc 3: stop test
//   FINAL      deviation output streams to the image output
// Start pulses to the sub-modules are registered and issued on the state
// change; each sub-module answers with a done pulse. `done` pulses when the
// final image has left, and the load unit is then released for the next
// frame. The state sequence is this design's; the method only states that
// the controller drives each sub-module from the execution status.
module top_controller #(
  parameter int unsigned SAMP_AW = pat_pkg::SAMP_AW,
  parameter int unsigned K_W     = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [K_W-1:0]     k_max,
  output logic               busy,
  output logic               done,
  output logic [K_W-1:0]     t,
  output logic               stopped_by_loss,
  // load unit
  input  logic               lu_loaded,
  output logic               lu_release,
  output logic [1:0]         cc,
  output logic               copying,
  output logic [SAMP_AW-1:0] copy_rd_addr,
  output logic               copy_wr_en,
  output logic [SAMP_AW-1:0] copy_wr_addr,
  // DAS
  output logic               das_start,
  input  logic               das_done,
  output logic               das_out_start,
  // deviation
  output logic               t_zero,
  output logic               dev_in_start,
  input  logic               dev_in_done,
  output logic               dev_out_start,
  output logic               out_final,
  input  logic               dev_out_done,
  // s-Wave
  output logic               sw_pix_wr_start,
  output logic               sw_start,
  input  logic               sw_done,
  // loss
  output logic               loss_start,
  output logic               loss_first,
  output logic               loss_last,
  input  logic               loss_done,
  input  logic               iter_end
);
  typedef enum logic [3:0] {
    IDLE, WAIT_LOAD, COPY, COPY_END, DAS0, DAS_OUT, DEV_OUT,
    SW, LOSS, DASR, CHECK, FINAL
  } state_e;
  state_e state;
  logic [K_W-1:0] k_q;

  always_comb begin
    busy       = state != IDLE;
    t_zero     = t == '0;
    copying    = state == COPY || state == COPY_END;
    loss_first = cc == 2'd0;
    loss_last  = cc == 2'd3;
  end

  always_ff @(posedge clk) begin
    das_start       <= 1'b0;
    das_out_start   <= 1'b0;
    dev_in_start    <= 1'b0;
    dev_out_start   <= 1'b0;
    sw_pix_wr_start <= 1'b0;
    sw_start        <= 1'b0;
    loss_start      <= 1'b0;
    lu_release      <= 1'b0;
    done            <= 1'b0;
    copy_wr_en      <= 1'b0;
    copy_wr_addr    <= copy_rd_addr;
    if (!rst_n) begin
      state           <= IDLE;
      t               <= '0;
      cc              <= '0;
      out_final       <= 1'b0;
      stopped_by_loss <= 1'b0;
      copy_rd_addr    <= '0;
    end else begin
      case (state)
        IDLE: if (start) begin
          k_q             <= k_max;
          stopped_by_loss <= 1'b0;
          state           <= WAIT_LOAD;
        end
        WAIT_LOAD: if (lu_loaded) begin
          t            <= '0;
          cc           <= '0;
          copy_rd_addr <= '0;
          out_final    <= 1'b0;
          state        <= COPY;
        end
        COPY: begin
          copy_wr_en   <= 1'b1;
          copy_rd_addr <= copy_rd_addr + 1'b1;
          if (copy_rd_addr == SAMP_AW'((1 << SAMP_AW) - 1)) state <= COPY_END;
        end
        COPY_END: begin
          das_start <= 1'b1;
          state     <= DAS0;
        end
        DAS0: if (das_done) begin
          if (cc == 2'd3) begin
            das_out_start <= 1'b1;
            dev_in_start  <= 1'b1;
            state         <= DAS_OUT;
          end else begin
            cc           <= cc + 1'b1;
            copy_rd_addr <= '0;
            state        <= COPY;
          end
        end
        DAS_OUT: if (dev_in_done) begin
          dev_out_start   <= 1'b1;
          sw_pix_wr_start <= 1'b1;
          state           <= DEV_OUT;
        end
        DEV_OUT: if (dev_out_done) begin
          cc       <= '0;
          sw_start <= 1'b1;
          state    <= SW;
        end
        SW: if (sw_done) begin
          loss_start <= 1'b1;
          state      <= LOSS;
        end
        LOSS: if (loss_done) begin
          das_start <= 1'b1;
          state     <= DASR;
        end
        DASR: if (das_done) begin
          if (cc == 2'd3) begin
            state <= CHECK;
          end else begin
            cc       <= cc + 1'b1;
            sw_start <= 1'b1;
            state    <= SW;
          end
        end
        CHECK: begin
          if (t != '0 && (iter_end || t == k_q)) begin
            stopped_by_loss <= iter_end;
            out_final       <= 1'b1;
            dev_out_start   <= 1'b1;
            state           <= FINAL;
          end else begin
            t             <= t + 1'b1;
            das_out_start <= 1'b1;
            dev_in_start  <= 1'b1;
            state         <= DAS_OUT;
          end
        end
        FINAL: if (dev_out_done) begin
          lu_release <= 1'b1;
          done       <= 1'b1;
          state      <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
