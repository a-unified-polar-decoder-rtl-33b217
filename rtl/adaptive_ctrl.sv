// adaptive_ctrl: control logic of the adaptive decoder (SC first, SCL-L only on failure).
//
// On start it launches the core in SC mode (one path). When the core finishes, a passing
// CRC ends the decode. A failing CRC launches the core again on the same channel LLRs in
// list mode (SCL with L paths and T CRC checks); its result ends the decode, whatever its
// CRC says. MODE_SC stops after the SC pass and MODE_SCL skips it. The list size jumps
// straight from 1 to L, as the paper's simplified adaptive SCL does; the handshake
// (start pulse in, done pulse out, one core run at a time) is this design's.
// used_scl reports whether the list pass ran for the last decode.
module adaptive_ctrl
  import polar_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  dec_mode_t  mode,
  input  logic       core_done,
  input  logic       core_crc_pass,
  output logic       core_start,
  output logic       core_list_en,
  output logic       busy,
  output logic       done,
  output logic       crc_pass,
  output logic       used_scl
);

  typedef enum logic [1:0] {A_IDLE, A_SC, A_SCL} astate_t;
  astate_t state;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state        <= A_IDLE;
      core_start   <= 1'b0;
      core_list_en <= 1'b0;
      done         <= 1'b0;
      crc_pass     <= 1'b0;
      used_scl     <= 1'b0;
    end else begin
      core_start <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        A_IDLE: if (start) begin
          core_start <= 1'b1;
          if (mode == MODE_SCL) begin
            core_list_en <= 1'b1;
            used_scl     <= 1'b1;
            state        <= A_SCL;
          end else begin
            core_list_en <= 1'b0;
            used_scl     <= 1'b0;
            state        <= A_SC;
          end
        end
        A_SC: if (core_done) begin
          if (core_crc_pass || mode == MODE_SC) begin
            crc_pass <= core_crc_pass;
            done     <= 1'b1;
            state    <= A_IDLE;
          end else begin
            core_start   <= 1'b1;
            core_list_en <= 1'b1;
            used_scl     <= 1'b1;
            state        <= A_SCL;
          end
        end
        A_SCL: if (core_done) begin
          crc_pass <= core_crc_pass;
          done     <= 1'b1;
          state    <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end

  assign busy = (state != A_IDLE);

endmodule
