// booth_mul -- sequential radix-4 Booth multiplier, W x W -> 2W bits, unsigned.
//
// The multiplier is scanned two bits per clock. Each step looks at three bits
// {b(2i+1), b(2i), b(2i-1)} (an 8-way choice), adds 0, +-B or +-2B to the upper half of
// the product register, and shifts the whole product register right by two bits
// (arithmetic shift of the signed upper half). The low half of the product register holds
// the not-yet-scanned multiplier bits, so the product grows into the place they leave.
// After W/2 steps the register holds the full 2W-bit product.
//
// Booth recoding reads the multiplier as a signed number. For unsigned operands the most
// significant multiplier bit is then worth -2^(W-1) instead of +2^(W-1); the last step adds
// the missing 2^W * B by adding 4B along with its recoded digit, when that bit is set.
//
// Interface and timing: with the unit idle, a high start loads the operands and performs
// the first step in the same clock; the remaining W/2 - 1 steps follow one per clock. done
// pulses for one cycle W/2 clocks after start (128 for W = 256) and product then stays
// valid until the next start. start is ignored while busy.
//
// Follows the paper: radix-4 Booth recoding with the digit table of its algorithm, the
// IDLE/BUSY state register, product register holding the multiplier, multiplicand register,
// step counter (Q register with reset and increment), 8-way selection on three bits, W/2
// clocks. This design's choices: operands loaded and first step taken on the same clock
// (so that a product plus its reduction fit in W/2 + 1 clocks), the unsigned correction
// on the last step, and a W+6-bit signed accumulator.
module booth_mul #(
  parameter int unsigned W = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   multiplier,
  input  logic [W-1:0]   multiplicand,
  output logic           busy,
  output logic           done,
  output logic [2*W-1:0] product
);

  localparam int unsigned HW    = W + 6;          // signed accumulator width
  localparam int unsigned STEPS = W / 2;
  localparam int unsigned CW    = $clog2(STEPS) + 1;

  typedef enum logic {IDLE, BUSY} state_t;

  state_t          state_reg;
  logic [HW-1:0]   hi_reg;     // upper (signed) part of the product register
  logic [W-1:0]    lo_reg;     // lower part: remaining multiplier bits / low product bits
  logic            qm1_reg;    // bit shifted out last (b(2i-1))
  logic [W-1:0]    mcand_reg;
  logic [CW-1:0]   q_reg;      // index of the next step

  // operands of the current step: fresh inputs on the start clock, registers afterwards
  logic [HW-1:0]   hi_cur;
  logic [W-1:0]    lo_cur;
  logic            qm1_cur;
  logic [W-1:0]    mcand_cur;
  logic            last;
  logic            step;

  logic [2:0]      sel;
  logic [HW-1:0]   b1, b2, pp, sum;
  logic [HW-1:0]   hi_next;
  logic [W-1:0]    lo_next;
  logic            qm1_next;

  always_comb begin
    step      = (state_reg == BUSY) || start;
    if (state_reg == IDLE) begin
      hi_cur    = '0;
      lo_cur    = multiplier;
      qm1_cur   = 1'b0;
      mcand_cur = multiplicand;
      last      = (STEPS == 1);
    end else begin
      hi_cur    = hi_reg;
      lo_cur    = lo_reg;
      qm1_cur   = qm1_reg;
      mcand_cur = mcand_reg;
      last      = (q_reg == CW'(STEPS - 1));
    end

    sel = {lo_cur[1], lo_cur[0], qm1_cur};
    b1  = HW'(mcand_cur);
    b2  = HW'(mcand_cur) << 1;
    unique case (sel)
      3'b001, 3'b010: pp = b1;
      3'b011:         pp = b2;
      3'b100:         pp = -b2;
      3'b101, 3'b110: pp = -b1;
      default:        pp = '0;
    endcase
    // unsigned correction: the top multiplier bit carries +2^W * B, i.e. 4B at this weight
    if (last && lo_cur[1]) pp = pp + (b1 << 2);

    sum      = hi_cur + pp;
    hi_next  = HW'($signed(sum) >>> 2);
    lo_next  = {sum[1:0], lo_cur[W-1:2]};
    qm1_next = lo_cur[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_reg <= IDLE;
      hi_reg    <= '0;
      lo_reg    <= '0;
      qm1_reg   <= 1'b0;
      mcand_reg <= '0;
      q_reg     <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (step) begin
        hi_reg  <= hi_next;
        lo_reg  <= lo_next;
        qm1_reg <= qm1_next;
        if (state_reg == IDLE) mcand_reg <= multiplicand;
        if (last) begin
          state_reg <= IDLE;
          q_reg     <= '0;
          done      <= 1'b1;
        end else begin
          state_reg <= BUSY;
          q_reg     <= (state_reg == IDLE) ? CW'(1) : q_reg + CW'(1);
        end
      end
    end
  end

  assign busy    = (state_reg == BUSY);
  assign product = {hi_reg[W-1:0], lo_reg};

endmodule
