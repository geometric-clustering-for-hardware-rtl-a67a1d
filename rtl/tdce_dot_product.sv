// tdce_dot_product -- Control Unit 2 and the simplified dot-product of the TDCE.
//
// With the pre-summed values of a block in the secondary banks, each of the L
// outputs of the block is
//     y[j] = sum over w = 0 .. NC-1 of x_S[j][w] * g_C[w].
// Only LP < L complex multipliers are used (L a multiple of LP). The unit
// runs NC cluster iterations; in each it reads g_C[w] once and, in L/LP inner
// iterations, takes LP of the L banks' words at position w through a MUX,
// multiplies them by g_C[w] and accumulates the LP products into the output
// memory (read/write of LP samples). The MAC phase takes NC*L/LP cycles.
// After the last cluster the secondary banks are released (mac_done) and the
// output memory is sent out LP samples per cycle through the output MUX
// ("memory to stream output"), in L/LP cycles, oldest outputs first.
//
// Interface and timing: start is accepted while ready is high (unit idle, or
// in its last stream cycle); the first MAC cycle is the next cycle, so one
// block occupies the unit for NC*L/LP + L/LP cycles. sec_addr / g_addr carry the current
// cluster; sec_data and g_data are read asynchronously. mac_done pulses in the
// last MAC cycle. out_valid is high for the L/LP stream cycles, with
// out_data[p] = y[g*LP + p] in stream cycle g. The output has no back-pressure.
// The first iteration of a block overwrites instead of accumulating, which
// clears the output memory. The MAC scheme follows the paper; the schedule of
// the stream phase (after, not overlapped with, the MAC phase) is this
// design's choice.
module tdce_dot_product
  import tdce_pkg::*;
#(
  parameter int L  = tdce_pkg::DEF_L,  // outputs per block
  parameter int LP = tdce_pkg::DEF_LP,  // parallel complex multiplications
  parameter int NC = tdce_pkg::DEF_NC,  // clusters
  localparam int G  = L / LP,
  localparam int IW = (NC > 1) ? $clog2(NC) : 1,
  localparam int GW = (G  > 1) ? $clog2(G)  : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          ready,
  output logic          busy,
  // secondary banks and clustered taps
  output logic [IW-1:0] sec_addr,
  input  cplx_t         sec_data [L],
  output logic [IW-1:0] g_addr,
  input  cplx_t         g_data,
  output logic          mac_done,
  // output stream
  output logic          out_valid,
  output cplx_t         out_data [LP]
);

  if (L % LP != 0) begin : g_check
    $error("L must be a multiple of LP");
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_STREAM} state_t;
  state_t state;

  logic [IW-1:0] w;
  logic [GW-1:0] grp;
  cplx_t omem [L];
  cplx_t sel  [LP];
  cplx_t prod [LP];

  // a new block may start in the last stream cycle, so blocks follow each
  // other without a gap
  assign ready     = (state == S_IDLE) || ((state == S_STREAM) && (int'(grp) == G-1));
  assign busy      = (state != S_IDLE);
  assign sec_addr  = w;
  assign g_addr    = w;
  assign mac_done  = (state == S_MAC) && (int'(w) == NC-1) && (int'(grp) == G-1);
  assign out_valid = (state == S_STREAM);

  // input MUX: LP of the L banks, then LP multipliers
  always_comb begin
    for (int p = 0; p < LP; p++) sel[p] = sec_data[int'(grp)*LP + p];
  end

  for (genvar p = 0; p < LP; p++) begin : g_mul
    tdce_cmul u_mul (.a(sel[p]), .b(g_data), .p(prod[p]));
  end

  // output MUX: LP samples of the output memory per stream cycle
  always_comb begin
    for (int p = 0; p < LP; p++) out_data[p] = omem[int'(grp)*LP + p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      w     <= '0;
      grp   <= '0;
      for (int k = 0; k < L; k++) omem[k] <= CPLX_ZERO;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          w     <= '0;
          grp   <= '0;
        end
        S_MAC: begin
          for (int p = 0; p < LP; p++)
            omem[int'(grp)*LP + p] <= cadd((w == '0) ? CPLX_ZERO : omem[int'(grp)*LP + p],
                                           prod[p]);
          if (int'(grp) == G-1) begin
            grp <= '0;
            if (int'(w) == NC-1) begin
              w     <= '0;
              state <= S_STREAM;
            end else begin
              w <= w + 1'b1;
            end
          end else begin
            grp <= grp + 1'b1;
          end
        end
        S_STREAM: begin
          if (int'(grp) == G-1) begin
            grp   <= '0;
            w     <= '0;
            state <= start ? S_MAC : S_IDLE;
          end else begin
            grp <= grp + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> ready);

endmodule
