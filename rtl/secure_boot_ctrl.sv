// secure_boot_ctrl: runs the secure boot of the package through the
// chiplets' IEEE 1500 wrappers.
//
// A boot_req starts one of two sequences. With provision low (a boot):
//   1. raise secure_boot and shift WS_AUTH into every chiplet's WIR at once
//      (the chiplets authenticate in parallel, so none can hold up another);
//   2. wait until every chiplet raises auth_ready, or until TIMEOUT cycles
//      pass; a chiplet that has not answered is marked not responsive;
//   3. capture the chiplets' responses into their WBRs and shift RESP_W bits
//      over the interposer into the in-house chiplet, then update;
//   4. start the in-house evaluation and wait for eval_done;
//   5. shift WS_BYPASS into the WIRs, pulse boot_done and drop secure_boot;
//      boot_ok is the evaluation result.
// With provision high only WS_REKEY is shifted in, so that each chiplet
// draws its garbling labels from its TRNG; boot_ok is then left low.
//
// The use of WIR and WBR to start authentication and collect the garbled
// outputs, the parallel authentication and the secure_boot signal framing
// the boot (waveform of the published secure boot) follow the paper. The
// timeout, the exact sequence and the return to WS_BYPASS are this
// design's. One instruction shift takes WIR_W + 1 cycles; the whole boot
// takes about 2*(WIR_W+1) + chiplet latency + RESP_W + 2 + evaluation
// latency + 3 cycles. The wrapper-control assertion is disabled while rst_n
// is low, which a lint tool reports as rst_n also being used synchronously.
module secure_boot_ctrl
  import safe_sip_pkg::*;
#(
  parameter int unsigned NC      = N_CHIPLETS,
  parameter int unsigned RESP_W  = SIG_W * KAPPA + DIGEST_W,
  parameter int unsigned TIMEOUT = 2 * sha_cycles(SIG_W * KAPPA) + 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          boot_req,
  input  logic          provision,
  // chiplet handshake and wrapper controls (broadcast)
  input  logic [NC-1:0] chiplet_ready,
  output logic          select_wir,
  output logic          shift_wr,
  output logic          capture_wr,
  output logic          update_wr,
  output logic          wir_wsi,
  output logic          select_wbr,
  // in-house chiplet
  output logic          eval_start,
  input  logic          eval_done,
  input  logic          eval_auth,
  output logic [NC-1:0] responsive,
  // status
  output logic          secure_boot,
  output logic          boot_done,
  output logic          boot_ok,
  output logic          timed_out
);

  typedef enum logic [3:0] {
    S_IDLE, S_WIR_SHIFT, S_WIR_UPDATE, S_WAIT, S_CAPTURE, S_WBR_SHIFT,
    S_WBR_UPDATE, S_EVAL, S_EVAL_WAIT, S_CLOSE_SHIFT, S_CLOSE_UPDATE, S_FINISH
  } state_e;

  state_e           state;
  wir_instr_e       instr;
  logic [31:0]      cnt;
  logic             prov_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= S_IDLE;
      instr      <= WS_BYPASS;
      cnt        <= '0;
      prov_q     <= 1'b0;
      responsive <= '0;
      boot_ok    <= 1'b0;
      timed_out  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (boot_req) begin
          prov_q    <= provision;
          instr     <= provision ? WS_REKEY : WS_AUTH;
          cnt       <= '0;
          boot_ok   <= 1'b0;
          timed_out <= 1'b0;
          state     <= S_WIR_SHIFT;
        end
        S_WIR_SHIFT: begin
          cnt <= cnt + 1;
          if (cnt == WIR_W - 1) state <= S_WIR_UPDATE;
        end
        S_WIR_UPDATE: begin
          cnt   <= '0;
          state <= prov_q ? S_FINISH : S_WAIT;
        end
        S_WAIT: begin
          cnt <= cnt + 1;
          // the cycle after the update the ready flags are still the old
          // ones being cleared, so they are looked at from the next cycle on
          if (cnt != 0 && (&chiplet_ready || cnt == TIMEOUT - 1)) begin
            responsive <= chiplet_ready;
            timed_out  <= !(&chiplet_ready);
            state      <= S_CAPTURE;
          end
        end
        S_CAPTURE: begin
          cnt   <= '0;
          state <= S_WBR_SHIFT;
        end
        S_WBR_SHIFT: begin
          cnt <= cnt + 1;
          if (cnt == RESP_W - 1) state <= S_WBR_UPDATE;
        end
        S_WBR_UPDATE: state <= S_EVAL;
        S_EVAL:       state <= S_EVAL_WAIT;
        S_EVAL_WAIT: if (eval_done) begin
          boot_ok <= eval_auth;
          instr   <= WS_BYPASS;
          cnt     <= '0;
          state   <= S_CLOSE_SHIFT;
        end
        S_CLOSE_SHIFT: begin
          cnt <= cnt + 1;
          if (cnt == WIR_W - 1) state <= S_CLOSE_UPDATE;
        end
        S_CLOSE_UPDATE: state <= S_FINISH;
        S_FINISH:       state <= S_IDLE;
        default:        state <= S_IDLE;
      endcase
    end

  always_comb begin
    select_wir  = state inside {S_WIR_SHIFT, S_WIR_UPDATE, S_CLOSE_SHIFT, S_CLOSE_UPDATE};
    shift_wr    = state inside {S_WIR_SHIFT, S_WBR_SHIFT, S_CLOSE_SHIFT};
    update_wr   = state inside {S_WIR_UPDATE, S_WBR_UPDATE, S_CLOSE_UPDATE};
    capture_wr  = (state == S_CAPTURE);
    select_wbr  = state inside {S_CAPTURE, S_WBR_SHIFT, S_WBR_UPDATE};
    wir_wsi     = 1'b0;
    for (int i = 0; i < WIR_W; i++)
      if (cnt == i) wir_wsi = instr[i];
    eval_start  = (state == S_EVAL);
    secure_boot = (state != S_IDLE);
    boot_done   = (state == S_FINISH);
  end

  // Wrapper rules: one operation at a time.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             $onehot0({shift_wr, capture_wr, update_wr}));

endmodule
