// tmr_fir -- triple-modular-redundant FIR accelerator.
//
// The processing system sends each input sample three times (three AXI
// writes); an input voter turns the three copies into one sample, which
// feeds three identical FIR replicas; an output voter masks a wrong replica,
// and the voted result goes back to the processing system, which votes its
// own three reads once more. This chain -- voter, three accelerators, voter
// -- is the paper's TMR on Zynq. The design adds the bookkeeping that lets
// TMR call for partial reconfiguration: a replica outvoted in PERM_THRESH
// consecutive results is declared permanently faulty (dpr_req[i], sticky).
// When the reconfiguration is done, dpr_done[i] clears the flag and empties
// the replica's filter state; PERM_THRESH exceeds TAPS so that the refilling
// replica is not flagged again. The valid strobe is voted together with the
// data.
//
// Timing: out_valid/out_data follow the voted input by one clock (the FIR
// latency); the voters are combinational. in_mismatch / out_mismatch show,
// per clock, which input copy / replica was outvoted; masked_count counts
// results in which a replica error was masked.
module tmr_fir #(
  parameter int unsigned DW          = 16,
  parameter int unsigned CW          = 16,
  parameter int unsigned TAPS        = 16,
  parameter int unsigned PERM_THRESH = 32,
  localparam int unsigned OW         = DW + CW + $clog2(TAPS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           in_valid,
  input  logic [2:0][DW-1:0]   in_data,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_data,
  output logic [2:0]           in_mismatch,
  output logic [2:0]           out_mismatch,
  output logic [2:0]           dpr_req,
  input  logic [2:0]           dpr_done,
  output logic [15:0]          masked_count
);

  localparam int unsigned CNTW = $clog2(PERM_THRESH + 1);

  logic [DW:0]          in_voted;
  logic [2:0]           rep_valid;
  logic signed [OW-1:0] rep_data [3];
  logic [OW:0]          out_voted;
  logic [CNTW-1:0]      bad_run [3];

  tmr_voter #(.W(DW + 1)) u_in_voter (
    .a({in_valid[0], in_data[0]}),
    .b({in_valid[1], in_data[1]}),
    .c({in_valid[2], in_data[2]}),
    .y(in_voted),
    .mismatch(in_mismatch)
  );

  for (genvar i = 0; i < 3; i++) begin : g_rep
    fir_filter #(.DW(DW), .CW(CW), .TAPS(TAPS)) u_fir (
      .clk, .rst_n,
      .clr(dpr_done[i]),
      .in_valid(in_voted[DW]),
      .in_data(in_voted[DW-1:0]),
      .out_valid(rep_valid[i]),
      .out_data(rep_data[i])
    );
  end

  tmr_voter #(.W(OW + 1)) u_out_voter (
    .a({rep_valid[0], rep_data[0]}),
    .b({rep_valid[1], rep_data[1]}),
    .c({rep_valid[2], rep_data[2]}),
    .y(out_voted),
    .mismatch(out_mismatch)
  );

  assign out_valid = out_voted[OW];
  assign out_data  = out_voted[OW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) bad_run[i] <= '0;
      dpr_req      <= '0;
      masked_count <= '0;
    end else begin
      if (out_valid && (out_mismatch != 3'b000)) masked_count <= masked_count + 1'b1;
      for (int i = 0; i < 3; i++) begin
        if (dpr_done[i]) begin
          dpr_req[i] <= 1'b0;
          bad_run[i] <= '0;
        end else if (out_valid) begin
          if (!out_mismatch[i]) begin
            bad_run[i] <= '0;
          end else if (bad_run[i] == CNTW'(PERM_THRESH - 1)) begin
            dpr_req[i] <= 1'b1;
          end else begin
            bad_run[i] <= bad_run[i] + 1'b1;
          end
        end
      end
    end
  end

endmodule
