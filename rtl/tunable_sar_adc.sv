// tunable_sar_adc: successive-approximation ADC whose search range is set per
// conversion (adaptive resolution).
//
// The held bitline level is represented by its ideal code `vin`; the
// comparator decision "level >= trial code" is therefore vin >= trial. One
// comparison is made per clock cycle. On `start` the ADC latches vin and cfg:
//   * if cfg.ovf_test, it first compares against 2^cfg.top. A true result means
//     a bit above the kept window is set, the final output must saturate, and
//     the conversion ends there (`ovf` = 1);
//   * if cfg.conv, it then does a normal MSB-first binary search over bits
//     cfg.top-1 down to cfg.lo only; lower bits stay 0 (they are dropped).
// With nothing to do it finishes at once. Idle cycles stand for a gated-off
// ADC. `done` pulses one cycle after the last comparison and `code`/`ovf`
// hold until the next start. `cmp` is high in every comparison cycle so a
// user can count ADC activity.
// The search order and early overflow test follow the paper; the
// one-comparison-per-cycle timing and the handshake are this design's own.
module tunable_sar_adc
  import newton_pkg::*;
#(
  parameter int unsigned BITS = ADC_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [BITS-1:0] vin,
  input  adc_cfg_t        cfg,
  output logic            busy,
  output logic            done,
  output logic            cmp,
  output logic [BITS-1:0] code,
  output logic            ovf
);
  typedef enum logic [1:0] {S_IDLE, S_OVF, S_CONV} state_e;
  state_e          state;
  logic [BITS-1:0] vin_q;
  adc_cfg_t        cfg_q;
  logic [3:0]      bit_q;
  logic [BITS:0]   trial;

  assign busy = (state != S_IDLE);
  assign cmp  = busy;

  always_comb begin
    trial = '0;
    if (state == S_OVF) trial = (BITS+1)'(1) << cfg_q.top;
    else                trial = {1'b0, code} | ((BITS+1)'(1) << bit_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vin_q <= '0;
      cfg_q <= '0;
      bit_q <= '0;
      code  <= '0;
      ovf   <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          vin_q <= vin;
          cfg_q <= cfg;
          code  <= '0;
          ovf   <= 1'b0;
          bit_q <= cfg.top - 4'd1;
          if (cfg.ovf_test)  state <= S_OVF;
          else if (cfg.conv) state <= S_CONV;
          else               done  <= 1'b1;
        end
        S_OVF: begin
          if ({1'b0, vin_q} >= trial) begin
            ovf   <= 1'b1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (cfg_q.conv) begin
            state <= S_CONV;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_CONV: begin
          if ({1'b0, vin_q} >= trial) code <= trial[BITS-1:0];
          if (bit_q == cfg_q.lo) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            bit_q <= bit_q - 4'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new conversion may only be requested while the ADC is idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
