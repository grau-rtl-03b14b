// grau_setting_buffer: the shifter settings look-up table.
//
// One entry per segment holds the segment's sign bit, its EXPONENTS shifter
// setting bits and its bias (the intercept of the linear piece). The entry
// is selected by the segment index from the threshold stage and read
// combinationally; the settings loader registers it. Entries are written
// from the configuration bus, so the activation function can be changed at
// run time. The paper names this buffer and calls it a look-up table; keeping
// the bias in it, the flip-flop storage, reset to zero and the separate write
// strobes for setting and bias are this design's choices.
// Setting word layout: bit EXPONENTS = sign (1 = negative slope),
// bit EXPONENTS-1 = first shifter unit (weight 2^-(m+1)) ... bit 0 = last
// unit (weight 2^-(m+EXPONENTS)), in the left-to-right order of the paper's
// encoding figure.
module grau_setting_buffer #(
  parameter int IN_W      = 32,
  parameter int SEGMENTS  = 6,
  parameter int EXPONENTS = 16,
  localparam int CW       = $clog2(SEGMENTS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we_setting,
  input  logic                   we_bias,
  input  logic [CW-1:0]          widx,
  input  logic [EXPONENTS:0]     wsetting,
  input  logic signed [IN_W-1:0] wbias,
  input  logic [CW-1:0]          ridx,
  output logic [EXPONENTS:0]     rsetting,
  output logic signed [IN_W-1:0] rbias
);

  logic [EXPONENTS:0]     setting_mem [SEGMENTS];
  logic signed [IN_W-1:0] bias_mem    [SEGMENTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SEGMENTS; i++) begin
        setting_mem[i] <= '0;
        bias_mem[i]    <= '0;
      end
    end else begin
      if (we_setting && int'(widx) < SEGMENTS) setting_mem[widx] <= wsetting;
      if (we_bias    && int'(widx) < SEGMENTS) bias_mem[widx]    <= wbias;
    end
  end

  always_comb begin
    if (int'(ridx) < SEGMENTS) begin
      rsetting = setting_mem[ridx];
      rbias    = bias_mem[ridx];
    end else begin
      rsetting = '0;
      rbias    = '0;
    end
  end

endmodule
