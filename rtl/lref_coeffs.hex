0008
ffee
ffbb
002b
00e8
ffac
fdad
0084
052f
ff4d
f46b
00d6
2809
3f1e
ff79
0076
014e
ff08
febc
02c7
009d
fafb
0233
077d
f6b1
f69f
2730
4a19
feb1
0109
ffdc
fe7f
02b6
fdf7
ff07
04d8
f984
02e3
06b4
ec59
1ed4
5cc2
0090
fa76
0444
fc12
0196
01dc
fafa
0628
fc23
fdd2
0aec
ebe0
1b1d
6249
0075
ff07
01f1
fc71
0661
f38c
285b
ffb0
0229
f75a
26cd
