// controller: sequencing of one convolution-and-neuron pass.
//
// A pass computes, for one output position, the N_PE filter sums over a
// K x K x n_cin receptive field and then updates the N_PE neurons. On 'run'
// the controller reads the n_cin*K filter rows from the input spike buffer and
// the weight memory (address 'rd_addr', one row per clock). Both memories
// answer one clock later, so 'pe_en' follows each read by one clock, with
// 'pe_clear' on the first row. In the clock after the last row has been
// accumulated the PE sums are copied into the temporary buffer ('tb_load')
// and the aggregation core is started ('agg_start'). When it reports
// 'agg_done', 'done' pulses and 'busy' falls.
//
// Latency from the clock edge that samples 'run' to the clock edge after
// which 'done' is high is K*n_cin + 21 clocks: K*n_cin row reads (one filter
// row per clock, so a 3x3 filter per channel takes 3 clocks as in the paper),
// the memory-read and flush clocks, the 17-clock aggregation pass and the
// registered handshakes. 'run' is ignored while
// busy. The paper names this block only ("Control And Configuration"); the
// protocol is this design's choice.
module controller
  import bsnn_pkg::*;
#(
  parameter int unsigned MAXC = MAX_CIN,
  localparam int unsigned RAW = $clog2(MAXC * K),
  localparam int unsigned CW  = $clog2(MAXC + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  input  logic [CW-1:0]  n_cin,
  output logic           busy,
  output logic           done,
  // datapath controls
  output logic [RAW-1:0] rd_addr,
  output logic           pe_clear,
  output logic           pe_en,
  output logic           tb_load,
  output logic           agg_start,
  input  logic           agg_done
);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_FLUSH, S_AGG} state_t;
  state_t          state;
  logic [RAW-1:0]  last_row;
  logic            rd_valid, rd_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      rd_addr   <= '0;
      last_row  <= '0;
      rd_valid  <= 1'b0;
      rd_first  <= 1'b0;
      pe_en     <= 1'b0;
      pe_clear  <= 1'b0;
      tb_load   <= 1'b0;
      agg_start <= 1'b0;
      done      <= 1'b0;
    end else begin
      pe_en     <= rd_valid;
      pe_clear  <= rd_first;
      rd_valid  <= 1'b0;
      rd_first  <= 1'b0;
      tb_load   <= 1'b0;
      agg_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (run && n_cin != '0) begin
          state    <= S_CONV;
          rd_addr  <= '0;
          last_row <= RAW'(n_cin * K - 1);
          rd_valid <= 1'b1;
          rd_first <= 1'b1;
        end
        S_CONV: begin
          if (rd_addr == last_row) begin
            state <= S_FLUSH;
          end else begin
            rd_addr  <= rd_addr + 1'b1;
            rd_valid <= 1'b1;
          end
        end
        S_FLUSH: if (!pe_en && !rd_valid) begin
          // last row accumulated in the previous clock
          tb_load   <= 1'b1;
          agg_start <= 1'b1;
          state     <= S_AGG;
        end
        S_AGG: if (agg_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) pe_clear |-> pe_en);

endmodule
