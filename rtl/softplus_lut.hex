b1
ad
aa
a6
a2
9e
9b
97
93
90
8d
89
86
83
80
7c
79
76
73
71
6e
6b
68
66
63
60
5e
5c
59
57
55
52
50
4e
4c
4a
48
46
44
42
40
3f
3d
3b
3a
38
37
35
34
32
31
2f
2e
2d
2b
2a
29
28
27
26
25
23
22
21
20
20
1f
1e
1d
1c
1b
1a
1a
19
18
17
17
16
15
15
14
14
13
12
12
11
11
10
10
0f
0f
0e
0e
0e
0d
0d
0c
0c
0c
0b
0b
0b
0a
0a
0a
09
09
09
09
08
08
08
08
07
07
07
07
07
06
06
06
06
06
05
05
05
05
05
05
05
04
04
04
04
04
04
04
04
03
03
03
03
03
03
03
03
03
03
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
02
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
01
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
