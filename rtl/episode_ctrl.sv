// episode_ctrl: episode synchronisation of the CLPs.
//
// In the Multi-CLP accelerator each CLP processes its own layers, each for a
// different image, and the outputs of an episode are the inputs of the next
// layer in the next episode, so all CLPs must finish an episode before the
// next one starts. On `start` this block pulses start to every CLP, records
// each CLP's done pulse, and when all have finished pulses `done`, counts the
// episode and reports in `ep_cycles` how many cycles it took. The paper states
// the synchronisation rule; the handshake is this design's.
module episode_ctrl #(
  parameter int unsigned G = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic         busy,
  output logic         done,
  output logic [G-1:0] clp_start,
  input  logic [G-1:0] clp_done,
  output logic [31:0]  episodes,
  output logic [31:0]  ep_cycles
);
  logic [G-1:0] finished;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      clp_start <= '0;
      finished  <= '0;
      episodes  <= '0;
      ep_cycles <= '0;
    end else begin
      done      <= 1'b0;
      clp_start <= '0;
      if (!busy) begin
        if (start) begin
          busy      <= 1'b1;
          clp_start <= '1;
          finished  <= '0;
          ep_cycles <= '0;
        end
      end else begin
        ep_cycles <= ep_cycles + 1;
        if ((finished | clp_done) == '1) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          episodes <= episodes + 1;
          finished <= '0;
        end else begin
          finished <= finished | clp_done;
        end
      end
    end
  end
endmodule
