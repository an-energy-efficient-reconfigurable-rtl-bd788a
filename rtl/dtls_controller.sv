// DTLS controller: command sequencer, status/interrupt registers and the
// re-transmission timer of the DTLS engine.
//
// A write to the command register starts one accelerator command
// (dtls_pkg::de_cmd_e in bits [3:0], GCM or ECC sub-operation in [6:4]). The
// sequencer then owns the DTLS RAM port: it reads the command's operand words
// from the accelerator configuration region into an operand buffer (one word
// per clock, through the registered RAM read), pulses the accelerator's
// start, waits for its done, and writes the result words back into the same
// region. It then sets the sticky `done` status flag, which raises the
// interrupt if enabled, so the sleeping processor wakes up.
//
// The re-transmission timer counts down once every TPRESC+1 clocks from the
// value written to the timer register and sets its expired flag, which can
// also interrupt, when it reaches zero.
//
// Registers (byte offsets, see dtls_pkg): CMD (W), STATUS (R: [0] busy,
// [1] done, [2] err, [3] inf, [4] timer expired; W1C on [1] and [4]),
// IRQ_EN ([0] done, [1] timer), TIMER, TPRESC. Register writes take effect on
// the clock edge of `reg_we`; reads return in `reg_rdata` one clock later.
//
// The command CMD_DRBG runs the HMAC-DRBG (hmac_drbg) on a seed from the
// RAM and returns 32 random bytes. CMD_SHA_LAST closes a transcript hash:
// the final partial block is padded in hardware (sha_finish).
//
// The paper's controller is a micro-coded state machine that also frames
// packets and parses X.509 certificates. Those functions are not described
// closely enough to be built and are absent; this block keeps operand
// movement, the session-hash finish, the random number generator, the
// completion interrupt and the timer.
//
// Lint note: the assertions below are disabled during reset with
// `disable iff (!rst_n)`, so the asynchronous reset is also read in a
// clocked expression; this is intended and adds no logic.
module dtls_controller
  import dtls_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // register port
  input  logic         reg_we,
  input  logic [11:0]  reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic [31:0]  reg_rdata,
  // DTLS RAM port, owned while busy
  output logic         ram_en,
  output logic         ram_we,
  output logic [8:0]   ram_addr,
  output logic [31:0]  ram_wdata,
  input  logic [31:0]  ram_rdata,
  // accelerators
  output logic [31:0]  opbuf [OPBUF_WORDS],
  output logic [6:4]   subop,
  output logic         sha_start,
  output logic         sha_init,
  input  logic         sha_done,
  input  logic [255:0] sha_digest,
  output logic         gcm_start,
  input  logic         gcm_done,
  input  logic [127:0] gcm_dout,
  output logic         ecc_start,
  input  logic         ecc_done,
  input  logic         ecc_err,
  input  logic         ecc_inf,
  input  logic [255:0] ecc_rx,
  input  logic [255:0] ecc_ry,
  output logic         fin_start,
  input  logic         fin_done,
  output logic         drbg_start,
  input  logic         drbg_done,
  input  logic [255:0] drbg_out,
  // status
  output logic         busy,
  output logic         irq
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_START, S_WAIT, S_STORE, S_FIN} state_e;
  state_e state;

  de_cmd_e     cmd;
  logic [5:0]  nin, out_off, nout;
  logic [5:0]  idx;          // word being requested
  logic [5:0]  cap;          // word being captured
  logic        cap_valid;
  logic        f_done, f_err, f_inf, f_tmr;
  logic [1:0]  irq_en;
  logic [31:0] timer, tpresc, tdiv;
  logic [31:0] res [16];

  // operand and result counts per command
  always_comb begin
    unique case (cmd)
      CMD_SHA_INIT, CMD_SHA_NEXT: begin nin = 6'd16; out_off = 6'd16; nout = 6'd8;  end
      CMD_GCM:                    begin nin = 6'd5;  out_off = 6'd8;  nout = 6'd4;  end
      CMD_DRBG:                   begin nin = 6'd8;  out_off = 6'd16; nout = 6'd8;  end
      CMD_SHA_LAST:               begin nin = 6'd27; out_off = 6'd16; nout = 6'd8;  end
      default:                    begin nin = 6'd41; out_off = 6'd41; nout = 6'd16; end
    endcase
  end

  // result words in RAM order
  always_comb begin
    for (int i = 0; i < 16; i++) res[i] = '0;
    unique case (cmd)
      CMD_SHA_INIT, CMD_SHA_NEXT, CMD_SHA_LAST:
        for (int i = 0; i < 8; i++) res[i] = sha_digest[255 - 32*i -: 32];
      CMD_GCM:
        for (int i = 0; i < 4; i++) res[i] = gcm_dout[127 - 32*i -: 32];
      CMD_DRBG:
        for (int i = 0; i < 8; i++) res[i] = drbg_out[255 - 32*i -: 32];
      default:
        for (int i = 0; i < 8; i++) begin
          res[i]     = ecc_rx[32*i +: 32];
          res[8 + i] = ecc_ry[32*i +: 32];
        end
    endcase
  end

  logic acc_done;
  assign acc_done = sha_done | gcm_done | ecc_done | drbg_done | fin_done;

  logic cmd_write;
  assign cmd_write = reg_we && reg_addr == DE_REG_CMD && state == S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cmd <= CMD_SHA_INIT; subop <= '0;
      idx <= '0; cap <= '0; cap_valid <= 1'b0;
      for (int i = 0; i < OPBUF_WORDS; i++) opbuf[i] <= '0;
      sha_start <= 1'b0; sha_init <= 1'b0; gcm_start <= 1'b0; ecc_start <= 1'b0;
      drbg_start <= 1'b0; fin_start <= 1'b0;
      f_done <= 1'b0; f_err <= 1'b0; f_inf <= 1'b0; f_tmr <= 1'b0; irq_en <= '0;
      timer <= '0; tpresc <= '0; tdiv <= '0; reg_rdata <= '0;
    end else begin
      sha_start <= 1'b0; gcm_start <= 1'b0; ecc_start <= 1'b0; drbg_start <= 1'b0;
      fin_start <= 1'b0;

      // ---- register writes ----
      if (reg_we) begin
        unique case (reg_addr)
          DE_REG_STATUS: begin
            if (reg_wdata[1]) f_done <= 1'b0;
            if (reg_wdata[4]) f_tmr  <= 1'b0;
          end
          DE_REG_IRQ_EN: irq_en <= reg_wdata[1:0];
          DE_REG_TIMER:  begin timer <= reg_wdata; tdiv <= '0; end
          DE_REG_TPRESC: tpresc <= reg_wdata;
          default: ;
        endcase
      end

      // ---- register reads ----
      unique case (reg_addr)
        DE_REG_STATUS: reg_rdata <= {27'b0, f_tmr, f_inf, f_err, f_done, busy};
        DE_REG_IRQ_EN: reg_rdata <= {30'b0, irq_en};
        DE_REG_TIMER:  reg_rdata <= timer;
        DE_REG_TPRESC: reg_rdata <= tpresc;
        default:       reg_rdata <= '0;
      endcase

      // ---- re-transmission timer ----
      if (!(reg_we && reg_addr == DE_REG_TIMER) && timer != '0) begin
        if (tdiv >= tpresc) begin
          tdiv  <= '0;
          timer <= timer - 1'b1;
          if (timer == 32'd1) f_tmr <= 1'b1;
        end else begin
          tdiv <= tdiv + 1'b1;
        end
      end

      // ---- command sequencer ----
      cap_valid <= 1'b0;
      if (cap_valid) opbuf[cap] <= ram_rdata;
      unique case (state)
        S_IDLE: if (cmd_write) begin
          cmd   <= de_cmd_e'(reg_wdata[3:0]);
          subop <= reg_wdata[6:4];
          f_done <= 1'b0; f_err <= 1'b0; f_inf <= 1'b0;
          idx   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (idx != nin) begin
            cap       <= idx;
            cap_valid <= 1'b1;
            idx       <= idx + 1'b1;
          end else if (!cap_valid) begin
            state <= S_START;
          end
        end
        S_START: begin
          unique case (cmd)
            CMD_SHA_INIT: begin sha_start <= 1'b1; sha_init <= 1'b1; end
            CMD_SHA_NEXT: begin sha_start <= 1'b1; sha_init <= 1'b0; end
            CMD_GCM:      gcm_start <= 1'b1;
            CMD_ECC:      ecc_start <= 1'b1;
            CMD_DRBG:     drbg_start <= 1'b1;
            CMD_SHA_LAST: fin_start <= 1'b1;
            default:      f_err <= 1'b1;
          endcase
          state <= (cmd inside {CMD_SHA_INIT, CMD_SHA_NEXT, CMD_SHA_LAST, CMD_GCM, CMD_ECC, CMD_DRBG}) ? S_WAIT : S_FIN;
        end
        S_WAIT: if (acc_done) begin
          if (cmd == CMD_ECC) begin f_err <= ecc_err; f_inf <= ecc_inf; end
          idx   <= '0;
          state <= S_STORE;
        end
        S_STORE: begin
          if (idx == nout - 1'b1) state <= S_FIN;
          idx <= idx + 1'b1;
        end
        default: begin  // S_FIN
          f_done <= 1'b1;
          state  <= S_IDLE;
        end
      endcase
    end
  end

  // RAM port: reads during S_LOAD, writes during S_STORE
  always_comb begin
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = '0;
    ram_wdata = '0;
    if (state == S_LOAD && idx != nin) begin
      ram_en   = 1'b1;
      ram_addr = 9'(ACFG_BASE + 32'(idx));
    end else if (state == S_STORE) begin
      ram_en    = 1'b1;
      ram_we    = 1'b1;
      ram_addr  = 9'(ACFG_BASE + 32'(out_off) + 32'(idx));
      ram_wdata = res[idx[3:0]];
    end
  end

  assign busy = (state != S_IDLE);
  assign irq  = (f_done & irq_en[0]) | (f_tmr & irq_en[1]);

  // only one accelerator may finish at a time, and only while waiting
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({sha_done, gcm_done, ecc_done, drbg_done, fin_done}));
  assert property (@(posedge clk) disable iff (!rst_n) acc_done |-> state == S_WAIT);

endmodule
