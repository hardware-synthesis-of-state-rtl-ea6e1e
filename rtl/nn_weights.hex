00ac34
00b773
001696
000000
004521
00f280
fff295
ff20a3
000000
fff338
00d395
ff5296
00a8bb
000000
0058fa
00187f
ff1a1d
00a734
000000
ff662b
00d478
ffe1bb
00ff26
00aa92
ff8f6c
ffac96
ffbee7
ffca80
ff39aa
ff709b
00f759
ffe29a
ff3b47
0015b0
ffed5d
ff90c9
ff45dd
ff0284
0012be
00c508
ff63c1
ff5725
009f36
ffcd69
0029ab
ffbc78
00a4ff
ff1b7d
ff2736
ff5993
002b91
006549
002877
004284
00dcfc
ffcb52
ff89c1
ff5ad4
ffda8c
003b9b
0062c4
00da86
ff3742
ff0599
00def2
ff96b4
004300
ff2658
00e0dd
ffddac
002b06
0071f0
ff3381
ffcaeb
00955d
ff6976
ff28ee
ff0ff2
007bc3
001566
ff1796
0081a6
ff8ca0
007272
000000
002a57
005fa0
ff5b47
00dbbb
000000
000000
000000
000000
000000
000000
000000
000000
000000
000000
000000
