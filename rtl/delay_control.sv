// delay_control: loads the requested fine delay into the IO configuration
// block (the paper's "Delay control").
//
// fine_steps asks for 0..22 steps of 50 ps (larger values are clamped to 22).
// The first dynamic delay takes min(fine, MAX1) steps and the second the rest
// (MAX1 = 15, MAX2 = 7 by default). Whenever the request differs from the
// value last loaded, the block shifts the two settings into io_config, MSB of
// setting 1 first, one bit per clk with cfg_ena high (S1_W + S2_W cycles),
// then pulses cfg_update for one cycle. busy is high from the first shift
// through the update. A change of fine_steps during a load starts a new load
// after it. After reset both settings are 0, which is also what io_config
// holds, so no load is needed for 0.
// The paper gives the purpose; the split and the protocol are this design's.
`timescale 1ps/100fs
module delay_control #(
  parameter int unsigned FINE_W = 5,
  parameter int unsigned S1_W   = 4,
  parameter int unsigned S2_W   = 3,
  parameter int unsigned MAX1   = 15,
  parameter int unsigned MAX2   = 7
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [FINE_W-1:0] fine_steps,
  output logic              cfg_ena,
  output logic              cfg_data,
  output logic              cfg_update,
  output logic              busy
);
  localparam int unsigned NB = S1_W + S2_W;

  typedef enum logic [1:0] {IDLE, SHIFT, UPDATE} state_t;
  state_t state;

  logic [FINE_W-1:0]     loaded;   // value now in io_config
  logic [FINE_W-1:0]     target;   // value being loaded
  logic [NB-1:0]         sr;
  logic [$clog2(NB+1)-1:0] cnt;
  logic [NB-1:0]         split;

  // Split a request into the two settings.
  always_comb begin
    int unsigned f, s1, s2;  // s2 <= MAX2 by construction
    f  = (32'(fine_steps) > MAX1 + MAX2) ? MAX1 + MAX2 : 32'(fine_steps);
    s1 = (f > MAX1) ? MAX1 : f;
    s2 = f - s1;
    split = {S1_W'(s1), S2_W'(s2)};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      loaded     <= '0;
      target     <= '0;
      sr         <= '0;
      cnt        <= '0;
      cfg_ena    <= 1'b0;
      cfg_data   <= 1'b0;
      cfg_update <= 1'b0;
    end else begin
      cfg_update <= 1'b0;
      case (state)
        IDLE: begin
          cfg_ena <= 1'b0;
          if (fine_steps != loaded) begin
            target   <= fine_steps;
            sr       <= split << 1;
            cfg_ena  <= 1'b1;
            cfg_data <= split[NB-1];
            cnt      <= 1;
            state    <= SHIFT;
          end
        end
        SHIFT: begin
          if (cnt == NB[$clog2(NB+1)-1:0]) begin
            cfg_ena    <= 1'b0;
            cfg_update <= 1'b1;
            state      <= UPDATE;
          end else begin
            cfg_data <= sr[NB-1];
            sr       <= sr << 1;
            cnt      <= cnt + 1'b1;
          end
        end
        UPDATE: begin
          loaded <= target;
          state  <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE);
endmodule
