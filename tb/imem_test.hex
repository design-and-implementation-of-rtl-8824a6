00100093
01110194
02120295
03130396
04140497
05150598
06160699
0717079a
0818089b
0919099c
0a1a0a9d
0b1b0b9e
0c1c0c9f
0d1d0da0
0e1e0ea1
0f1f0fa2
102010a3
112111a4
122212a5
132313a6
142414a7
152515a8
162616a9
172717aa
182818ab
192919ac
1a2a1aad
1b2b1bae
1c2c1caf
1d2d1db0
1e2e1eb1
1f2f1fb2
203020b3
213121b4
223222b5
233323b6
243424b7
253525b8
263626b9
273727ba
283828bb
293929bc
2a3a2abd
2b3b2bbe
2c3c2cbf
2d3d2dc0
2e3e2ec1
2f3f2fc2
304030c3
314131c4
324232c5
334333c6
344434c7
354535c8
364636c9
374737ca
384838cb
394939cc
3a4a3acd
3b4b3bce
3c4c3ccf
3d4d3dd0
3e4e3ed1
3f4f3fd2
