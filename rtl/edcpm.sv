// edcpm -- point multiplication Q = k.P on the twisted Edwards curve (top level).
//
// Two unified point-operation units work side by side: one adds the two point registers
// (the "PA" unit), the other doubles one of them (the "PD" unit). The pair of registers
// R0 (the Q registers) and R1 always differ by exactly P. For each key bit below the top
// one, from the top down:
//   bit = 0 :  R1 <- R0 + R1,  R0 <- 2*R0
//   bit = 1 :  R0 <- R0 + R1,  R1 <- 2*R1
// so both units run every step regardless of the key bit (the double-and-add-always
// pattern), and one point operation time per key bit suffices. The registers start as
// R0 = P and R1 = 2P (both supplied precomputed), which presumes that the top key bit is
// 1, like the initialisation T = P of the double-and-add algorithm; after the last bit,
// R0 = k.P.
//
// Datapath names follow the block diagram: MUX1 chooses the operands of a step, either
// the precomputed P / 2P (first step) or the routed results of the previous step; MUX2
// routes the PA and PD results into R0 / R1 under the key bit; a key-bit multiplexer picks
// which of the two the PD unit doubles. R1 needs no register of its own: between steps
// the point units hold their results in their output registers, and R0 is also copied
// into the Q registers, which drive the output.
//
// Interface and timing: start (while idle) samples key, p_in and p2_in. The first pair
// of point operations starts in the same clock (their operands come straight through
// MUX1), each later pair in the clock where the previous pair finishes, so the units
// are never idle between steps: KEY_BITS - 1 steps of 646 clocks, 255 * 646 = 164,730
// clocks for a 256-bit key. The Q registers load on the last of those clocks; done pulses in the next cycle,
// so done rises 164,731 cycles after start, and q holds the projective result until the
// next start. The result is projective (no inversion to affine form).
//
// Follows the paper: two unified point-operation units, precomputed P and 2P, MUX1/MUX2
// under the key, output registers Qx/Qy/Qz, results fed back to both units, (m-1)
// point-operation times per multiplication. This design's choices: the register pair with the constant
// difference P (the paper gives the two units and their routing but no step-by-step
// schedule), MUX1's select driven by the controller's idle/running state (the paper's
// comparator is not specified enough to build), the held unit results standing in for
// the separate feedback registers of the diagram, the precomputed 2P taken as an input,
// and a top key bit that must be 1.
module edcpm
  import edc_pkg::*;
#(
  parameter int unsigned KEY_BITS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [KEY_BITS-1:0] key,     // scalar k, key[KEY_BITS-1] must be 1
  input  point_t              p_in,    // base point P
  input  point_t              p2_in,   // precomputed 2P
  output logic                busy,
  output logic                done,
  output point_t              q        // k.P, projective
);

  localparam int unsigned IW = (KEY_BITS > 2) ? $clog2(KEY_BITS) : 1;

  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t              state;
  logic [KEY_BITS-1:0] key_reg;
  logic [IW-1:0]       bit_idx;      // key bit of the step in flight
  point_t              r0;           // Q registers

  // operands of the step being started
  point_t   op0, op1, pd_in;
  logic     kbit_next;               // key bit of the step being started
  logic     go;                      // start a pair of point operations this clock
  logic     last_step;

  // unit results
  point_t   pa_out, pd_out;
  logic     pa_done, pd_done;

  // routed results
  point_t   new_r0, new_r1;
  logic     kbit;

  // -------- step operands --------
  always_comb begin
    kbit      = key_reg[bit_idx];
    last_step = (bit_idx == '0);

    // MUX2: route the held unit results into R0 / R1 by the key bit of the finished step
    if (kbit) begin
      new_r0 = pa_out;
      new_r1 = pd_out;
    end else begin
      new_r0 = pd_out;
      new_r1 = pa_out;
    end

    // MUX1: precomputed P / 2P for the first step, routed results afterwards
    if (state == S_IDLE) begin
      op0       = p_in;
      op1       = p2_in;
      kbit_next = key[KEY_BITS-2];
      go        = start;
    end else begin
      op0       = new_r0;
      op1       = new_r1;
      kbit_next = key_reg[bit_idx - IW'(1)];
      go        = pa_done && !last_step;
    end
    // key-bit multiplexer in front of the doubling unit
    pd_in = kbit_next ? op1 : op0;
  end

  upo u_pa (
    .clk, .rst_n,
    .start (go),
    .p1    (op0),
    .p2    (op1),
    .a     (CURVE_A),
    .d     (CURVE_D),
    .done  (pa_done),
    .p3    (pa_out)
  );

  upo u_pd (
    .clk, .rst_n,
    .start (go),
    .p1    (pd_in),
    .p2    (pd_in),
    .a     (CURVE_A),
    .d     (CURVE_D),
    .done  (pd_done),
    .p3    (pd_out)
  );

  // -------- controller and point registers --------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      key_reg <= '0;
      bit_idx <= '0;
      r0      <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          key_reg <= key;
          bit_idx <= IW'(KEY_BITS - 2);
          state   <= S_RUN;
        end
        S_RUN: if (pa_done) begin
          r0    <= new_r0;
          if (last_step) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            bit_idx <= bit_idx - IW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state == S_RUN);
  assign q    = r0;

  a_units_together: assert property (@(posedge clk) disable iff (!rst_n) pa_done == pd_done)
    else $error("edcpm: point units out of step");
  a_key_msb: assert property (@(posedge clk) disable iff (!rst_n) (start && state == S_IDLE) |-> key[KEY_BITS-1])
    else $error("edcpm: top key bit must be 1");

endmodule
