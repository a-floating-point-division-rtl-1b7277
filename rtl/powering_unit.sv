// powering_unit: produces the powers m^1 .. m^N_TERMS of a fixed-point
// fraction m, two per step, and the sum of each step's pair.
//
// Organisation ("maximise squaring"): every even power is the square of a
// lower power and goes to the squaring unit; every odd power is m times the
// preceding even power and goes to the ILM multiplier. Both run in parallel,
// so each step yields one odd and one even power:
//   step 1:  m^2 = (m)^2            (the squarer also writes the leading-one
//                                    chain of m into the cache)
//   step j:  m^(2j-1) = m * m^(2j-2)   (multiplier, m side from the cache)
//            m^(2j)   = (m^j)^2        (squarer, omitted past N_TERMS)
// and the adder outputs m + m^2 in step 1 and m^(2j-1) + m^(2j) in step j,
// i.e. two Taylor terms per step, for the accumulator. With the default
// N_TERMS = 5 that is three steps: m+m^2, m^3+m^4, m^5.
//
// Numbers are unsigned fractions with W fraction bits (value = int / 2^W);
// each product is truncated to its upper W bits. The control logic keeps the
// powers already formed in a small register file.
//
// Interface: pulse `start` with `x` while `busy` is low. Each step pulses
// `term_valid` with `term`; `done` pulses together with the last term.
// `steps` counts the steps of the current run.
//
// Besides the chain of m, the unit keeps the leading-one chains that the
// multiplier finds for its even operands m^(2j-2) when such a power will be
// squared later, and the squarer then reads them instead of detecting the
// leading ones again (the first case is m^8 = (m^4)^2, so this needs
// N_TERMS >= 8 and N_TERMS/4 - 1 chain slots; at the default of 5 there are
// none). Where the multiplier stopped early, the squarer's own detector
// finishes the chain. `reused` counts the squarer stages fed this way.
module powering_unit #(
  parameter int unsigned W       = 64,
  parameter int unsigned N_TERMS = 5,
  localparam int unsigned KW = (W > 1) ? $clog2(W) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] x,
  output logic         busy,
  output logic         term_valid,
  output logic [W-1:0] term,
  output logic         done,
  output logic [7:0]   steps,
  output logic [15:0]  reused      // squarer stages fed from cached chains in this run
);

  typedef enum logic [2:0] {S_IDLE, S_SQ1, S_LAUNCH, S_WAIT} state_t;
  state_t state;

  logic [W-1:0] pw [1:N_TERMS];     // powers formed so far
  logic [7:0]   j;                   // current step
  logic         even_used;           // step j also forms the even power m^(2j)
  assign even_used = (32'(j) * 2 <= N_TERMS);

  // squaring unit
  logic           sq_start, sq_busy, sq_done;
  logic [W-1:0]   sq_in;
  logic [2*W-1:0] sq_out;
  logic           ch_we;
  logic [7:0]     ch_idx;
  logic [KW-1:0]  ch_k;
  logic [W-1:0]   ch_res;
  // multiplier and cache
  logic           mu_start, mu_busy, mu_done;
  logic [W-1:0]   mu_in;
  logic [2*W-1:0] mu_out;
  logic [7:0]     c_raddr, c_len;
  logic [KW-1:0]  c_k;
  logic [W-1:0]   c_res;
  logic           c_last, c_clear, capture;
  logic           sq_got, mu_got;
  logic [W-1:0]   sq_hold, mu_hold;

  // cached chains of even powers (see below)
  localparam int unsigned NSLOT = (N_TERMS >= 8) ? N_TERMS / 4 - 1 : 0;
  localparam int unsigned NS    = (NSLOT > 0) ? NSLOT : 1;
  logic           sx_en;
  logic [7:0]     sx_len;
  logic [KW-1:0]  sx_k;
  logic [W-1:0]   sx_res;
  logic [7:0]     sq_cached;
  logic           mc_we;
  logic [7:0]     mc_idx;
  logic [KW-1:0]  mc_k;
  logic [W-1:0]   mc_res;

  squaring_unit #(.W(W)) u_sq (
    .clk, .rst_n, .start(sq_start), .n(sq_in), .busy(sq_busy), .done(sq_done),
    .sq(sq_out), .chain_we(ch_we), .chain_idx(ch_idx), .chain_k(ch_k),
    .chain_res(ch_res), .ext_en(sx_en), .ext_len(sx_len), .ext_k(sx_k),
    .ext_res(sx_res), .cached_stages(sq_cached));

  pow_cache #(.W(W), .DEPTH(W)) u_cache (
    .clk, .rst_n, .clear(c_clear), .we(ch_we && capture), .waddr(ch_idx),
    .wdata_k(ch_k), .wdata_res(ch_res), .raddr(c_raddr), .rdata_k(c_k),
    .rdata_res(c_res), .rlast(c_last), .len(c_len));

  cached_multiplier #(.W(W)) u_mul (
    .clk, .rst_n, .start(mu_start), .b(mu_in), .raddr(c_raddr), .c_k(c_k),
    .c_res(c_res), .c_last(c_last), .c_len(c_len), .busy(mu_busy),
    .done(mu_done), .p(mu_out), .chain_we(mc_we), .chain_idx(mc_idx),
    .chain_k(mc_k), .chain_res(mc_res));

  // Reuse of leading-one data for even bases (step 5 of the schedule): in step
  // j the multiplier's operand is m^(2j-2); its chain, found by the
  // multiplier's detector, is kept in slot j-3 when m^(2j-2) will later be
  // squared (2j-2 >= 4 and 2(2j-2) <= N_TERMS). In step j with j even and
  // j >= 4 the squarer forms (m^j)^2 from slot j/2-2. m^4 = (m^2)^2 in step
  // 2 cannot use this, as m^2 goes into the multiplier in that same step.
  logic          cap_en;
  logic [7:0]    cap_slot, use_slot;
  assign cap_en   = ((state == S_LAUNCH) || (state == S_WAIT)) &&
                    (32'(j) * 2 - 2 >= 4) && ((32'(j) * 2 - 2) * 2 <= N_TERMS);
  assign cap_slot = j - 8'd3;
  assign use_slot = (j >> 1) - 8'd2;
  assign sx_en    = (NSLOT > 0) && (state == S_LAUNCH) && even_used &&
                    !j[0] && (j >= 8'd4);

  if (NSLOT > 0) begin : g_slots
    logic [KW-1:0] s_k   [NS];
    logic [W-1:0]  s_res [NS];
    logic [7:0]    s_len [NS];
    for (genvar g = 0; g < NS; g++) begin : g_slot
      logic s_last;
      pow_cache #(.W(W), .DEPTH(W)) u_slot (
        .clk, .rst_n, .clear(c_clear), .we(mc_we && cap_en && (32'(cap_slot) == g)),
        .waddr(mc_idx), .wdata_k(mc_k), .wdata_res(mc_res), .raddr(ch_idx),
        .rdata_k(s_k[g]), .rdata_res(s_res[g]), .rlast(s_last), .len(s_len[g]));
    end
    always_comb begin
      sx_k   = '0;
      sx_res = '0;
      sx_len = '0;
      for (int g = 0; g < NS; g++)
        if (32'(use_slot) == g) begin
          sx_k   = s_k[g];
          sx_res = s_res[g];
          sx_len = s_len[g];
        end
    end
  end else begin : g_noslots
    assign sx_k   = '0;
    assign sx_res = '0;
    assign sx_len = '0;
  end

  // Launch of a step: operands picked from the power register file.
  assign c_clear   = (state == S_IDLE) && start;

  always_comb begin
    sq_start = 1'b0;
    sq_in    = '0;
    mu_start = 1'b0;
    mu_in    = '0;
    if (state == S_IDLE && start && N_TERMS >= 2) begin
      sq_start = 1'b1;
      sq_in    = x;
    end else if (state == S_LAUNCH) begin
      mu_start = 1'b1;
      mu_in    = pw[2*j-2];
      if (even_used) begin
        sq_start = 1'b1;
        sq_in    = pw[j];
      end
    end
  end

  assign busy = (state != S_IDLE);

  // The two powers of the current step, whichever finished last.
  logic [W-1:0] odd_p, even_p;
  assign odd_p  = mu_done ? mu_out[2*W-1:W] : mu_hold;
  assign even_p = !even_used ? '0 : (sq_done ? sq_out[2*W-1:W] : sq_hold);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      j          <= '0;
      term_valid <= 1'b0;
      term       <= '0;
      done       <= 1'b0;
      steps      <= '0;
      reused     <= '0;
      capture    <= 1'b0;
      sq_got     <= 1'b0;
      mu_got     <= 1'b0;
      sq_hold    <= '0;
      mu_hold    <= '0;
      for (int i = 1; i <= N_TERMS; i++) pw[i] <= '0;
    end else begin
      term_valid <= 1'b0;
      done       <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          pw[1]  <= x;
          steps  <= '0;
          reused <= '0;
          if (N_TERMS == 1) begin
            term       <= x;
            term_valid <= 1'b1;
            done       <= 1'b1;
            steps      <= 8'd1;
          end else begin
            capture <= 1'b1;
            state   <= S_SQ1;
          end
        end
        S_SQ1: if (sq_done) begin
          capture    <= 1'b0;
          pw[2]      <= sq_out[2*W-1:W];
          term       <= pw[1] + sq_out[2*W-1:W];     // m + m^2
          term_valid <= 1'b1;
          steps      <= steps + 8'd1;
          j          <= 8'd2;
          if (N_TERMS <= 2) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_LAUNCH;
          end
        end
        S_LAUNCH: begin
          sq_got <= !even_used;
          mu_got <= 1'b0;
          state  <= S_WAIT;
        end
        S_WAIT: begin
          if (sq_done) begin
            sq_got  <= 1'b1;
            sq_hold <= sq_out[2*W-1:W];
            reused  <= reused + 16'(sq_cached);
          end
          if (mu_done) begin mu_got <= 1'b1; mu_hold <= mu_out[2*W-1:W]; end
          if ((sq_got || sq_done) && (mu_got || mu_done)) begin
            pw[2*j-1] <= odd_p;
            if (even_used) pw[2*j] <= even_p;
            term       <= odd_p + even_p;            // adder: odd + even power
            term_valid <= 1'b1;
            steps      <= steps + 8'd1;
            j          <= j + 8'd1;
            if (32'(j) * 2 + 1 > N_TERMS) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              state <= S_LAUNCH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
