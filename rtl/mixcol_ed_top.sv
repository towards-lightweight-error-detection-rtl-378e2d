// mixcol_ed_top: the error-detecting MixColumn architectures side by side.
//
// One input state feeds five units:
//   unit 0  Midori64 M_C MixColumn with cumulative column signature (CCS)
//   unit 1  Midori64 M_C MixColumn with interleaved CCS
//   unit 2  LED MixColumn with CCS
//   unit 3  LED MixColumn with interleaved CCS
//   unit 4  LED MixColumn protected by FST spatial redundancy
// Units 0-3 are combinational; their results and error flags are captured in
// an output register, as a round register of a cipher would. Unit 4 has its
// own original and redundant registers. All five results therefore appear
// one clock after in_valid, with out_valid.
//
// fault[u] is a test hook XORed onto unit u's MixColumn result (for unit 4
// onto the D input of its original register); fault_fst_red does the same
// for the FST redundant register. Tie them to zero in normal use.
//
// Interface: clk, rst_n (active low), in_valid, state_in, fault[5],
// fault_fst_red; out_valid, result[5], err[5], err_col[4] (per-column
// flags of units 0-3). Reset clears all registers.
// Putting the units together with a result register and a valid flag is this
// design's choice; the units themselves follow the paper.
module mixcol_ed_top
  import mixcol_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  state_t          state_in,
  input  state_t [4:0]    fault,
  input  state_t          fault_fst_red,
  output logic            out_valid,
  output state_t [4:0]    result,
  output logic   [4:0]    err,
  output logic   [3:0][3:0] err_col
);

  localparam int N_ED = 4;
  localparam cipher_e UNIT_CIPHER [N_ED] = '{MIDORI_MC, MIDORI_MC, LED, LED};
  localparam scheme_e UNIT_SCHEME [N_ED] = '{CCS, ICCS, CCS, ICCS};

  state_t [N_ED-1:0] r_ed;
  logic   [N_ED-1:0] e_ed;
  logic   [N_ED-1:0][3:0] ec_ed;

  for (genvar u = 0; u < N_ED; u++) begin : g_ed
    ed_mixcol #(.CIPHER(UNIT_CIPHER[u]), .SCHEME(UNIT_SCHEME[u])) u_ed (
      .a(state_in), .fault(fault[u]), .r(r_ed[u]), .err_col(ec_ed[u]), .err(e_ed[u]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int u = 0; u < N_ED; u++) result[u] <= '0;
      err[N_ED-1:0] <= '0;
      err_col <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int u = 0; u < N_ED; u++) result[u] <= r_ed[u];
        err[N_ED-1:0] <= e_ed;
        err_col <= ec_ed;
      end
    end

  fst_mixcol #(.CIPHER(LED)) u_fst (
    .clk(clk), .rst_n(rst_n), .en(in_valid), .a(state_in),
    .fault_orig(fault[4]), .fault_red(fault_fst_red),
    .r(result[4]), .err(err[4]));

endmodule
